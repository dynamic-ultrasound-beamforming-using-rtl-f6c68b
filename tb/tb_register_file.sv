// tb_register_file: self-checking test of the N x 16-bit sample store.
//
// Fills all 64 entries with random values in random order, with idle cycles
// in between, and checks every parallel read output against a copy held by
// the testbench after every write; writes with we low must change nothing.
module tb_register_file;
  localparam int N = 64;
  localparam int W = 16;

  logic clk = 1'b0;
  logic we;
  logic [5:0]   waddr;
  logic [W-1:0] wdata;
  logic [W-1:0] rdata [N];
  logic [W-1:0] model [N];
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  register_file #(.N(N), .DATA_W(W)) dut (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .rdata(rdata));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    we = 1'b0; waddr = '0; wdata = '0;
    // initial fill in order
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = 6'(i); wdata = W'($urandom); model[i] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int t = 0; t < 2000; t++) begin
      we    = ($urandom_range(1, 0) == 1);
      waddr = 6'($urandom_range(N - 1, 0));
      wdata = W'($urandom);
      if (we) model[waddr] = wdata;
      @(negedge clk);
      for (int i = 0; i < N; i++) check(rdata[i] == model[i], $sformatf("entry %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
