// tb_sd_accumulator: self-checking test of the shift-and-add converter.
//
// Random signed-digit streams with random idle cycles (en low) are fed
// after a clear; the register must hold the value of the digits seen so far,
// worked out independently in the testbench (S = 2S + p - n per enabled
// cycle, clear having priority), and each result is also compared with the
// value of the whole stream.
module tb_sd_accumulator;
  import lra_pkg::*;

  localparam int ACC_W = 23;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clear, en;
  sd_t  d;
  logic signed [ACC_W-1:0] acc;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  sd_accumulator #(.ACC_W(ACC_W)) dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .en(en), .d(d), .acc(acc));

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
    longint model;
    clear = 1'b0; en = 1'b0; d = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(acc == 0, "not zero after reset");
    for (int t = 0; t < 200; t++) begin
      clear = 1'b1; en = 1'b1; d = '{1'b1, 1'b0};
      @(negedge clk);
      clear = 1'b0;
      model = 0;
      check(acc == 0, "clear did not win over en");
      for (int i = 0; i < 20; i++) begin
        en = ($urandom_range(3, 0) != 0);
        d  = sd_t'($urandom_range(3, 0));
        if (en) model = 2 * model + longint'(d.p) - longint'(d.n);
        @(negedge clk);
        check(longint'(acc) == model, $sformatf("trial %0d step %0d: acc %0d, expected %0d", t, i, acc, model));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
