// tb_precision_control: self-checking test of the shared precision setting.
//
// Checks the reset value (full precision, 16), clamping of written values to
// 1..16, that a written value waits in k_pending and reaches k_active only on
// frame_start, and that a write in the frame_start cycle is not applied until
// the next frame_start.
module tb_precision_control;
  import lra_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic k_wr, frame_start;
  k_t   k_wdata, k_active, k_pending;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  precision_control #(.K_MAX(16)) dut (
    .clk(clk), .rst_n(rst_n), .k_wr(k_wr), .k_wdata(k_wdata), .frame_start(frame_start),
    .k_active(k_active), .k_pending(k_pending));

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
    int exp_pend, exp_act, v;
    k_wr = 1'b0; frame_start = 1'b0; k_wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(k_active == 16 && k_pending == 16, "reset value is not full precision");
    exp_pend = 16; exp_act = 16;
    for (int t = 0; t < 2000; t++) begin
      k_wr = ($urandom_range(3, 0) == 0);
      v = $urandom_range(31, 0);
      k_wdata = k_t'(v);
      frame_start = ($urandom_range(7, 0) == 0);
      @(negedge clk);
      if (frame_start) exp_act = exp_pend;
      if (k_wr) exp_pend = (v == 0) ? 1 : (v > 16) ? 16 : v;
      check(int'(k_pending) == exp_pend, $sformatf("k_pending %0d, expected %0d", k_pending, exp_pend));
      check(int'(k_active) == exp_act, $sformatf("k_active %0d, expected %0d", k_active, exp_act));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
