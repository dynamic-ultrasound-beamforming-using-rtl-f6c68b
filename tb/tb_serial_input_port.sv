// tb_serial_input_port: self-checking test of the core's sample entry.
//
// A producer offers samples with random gaps while 'enable' toggles. Every
// cycle the testbench checks in_ready against enable, that a write happens
// exactly on an accepted sample, carries that sample, goes to the next
// address in 0..N-1 order, and that 'last' marks exactly every N-th write.
module tb_serial_input_port;
  localparam int N = 64;
  localparam int W = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic enable, in_valid, in_ready, we, last;
  logic [W-1:0] in_data, wdata;
  logic [5:0]   waddr;
  int   checks = 0, failures = 0;
  int   exp_addr = 0, lasts = 0;

  always #5 clk = ~clk;

  serial_input_port #(.N(N), .DATA_W(W)) dut (
    .clk(clk), .rst_n(rst_n), .enable(enable), .in_valid(in_valid), .in_ready(in_ready),
    .in_data(in_data), .we(we), .waddr(waddr), .wdata(wdata), .last(last));

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
    enable = 1'b0; in_valid = 1'b0; in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 5000; t++) begin
      bit hold;
      @(negedge clk);
      // hold a sample that was offered but not taken
      hold = in_valid && !in_ready;
      enable = ($urandom_range(7, 0) != 0);
      if (!hold) begin
        in_valid = ($urandom_range(3, 0) != 0);
        in_data  = W'($urandom);
      end
      #1;
      check(in_ready == enable, "in_ready differs from enable");
      check(we == (in_valid && enable), "write strobe wrong");
      if (we) begin
        check(waddr == 6'(exp_addr), $sformatf("address %0d, expected %0d", waddr, exp_addr));
        check(wdata == in_data, "write data differs from sample");
        check(last == (exp_addr == N - 1), "last flag wrong");
        if (last) lasts++;
        exp_addr = (exp_addr + 1) % N;
      end else begin
        check(!last, "last without a write");
      end
    end
    check(lasts > 10, "too few complete pixels");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
