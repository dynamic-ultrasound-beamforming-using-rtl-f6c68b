// tb_output_register: self-checking test of a core's result holding register.
//
// Random loads (only when allowed) and random reads: the testbench keeps a
// model of the held value and valid flag and checks q, valid and can_load
// every cycle, including a load in the same cycle the old value is read.
module tb_output_register;
  localparam int W = 27;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic load, can_load, valid, ready;
  logic [W-1:0] d, q;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  output_register #(.W(W)) dut (
    .clk(clk), .rst_n(rst_n), .load(load), .d(d), .can_load(can_load),
    .valid(valid), .q(q), .ready(ready));

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
    logic         mv;
    logic [W-1:0] mq;
    int           swaps = 0;
    load = 1'b0; ready = 1'b0; d = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    mv = 1'b0; mq = '0;
    for (int t = 0; t < 3000; t++) begin
      ready = ($urandom_range(2, 0) == 0);
      d = W'($urandom);
      #1;
      check(can_load == (!mv || ready), "can_load wrong");
      load = can_load && ($urandom_range(1, 0) == 1);
      if (load && mv && ready) swaps++;
      @(negedge clk);
      if (load) begin mv = 1'b1; mq = d; end
      else if (ready) mv = 1'b0;
      load = 1'b0;
      check(valid == mv, "valid wrong");
      if (mv) check(q == mq, "held value wrong");
    end
    check(swaps > 0, "no load in a read cycle was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
