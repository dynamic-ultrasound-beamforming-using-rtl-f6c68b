// tb_lra_cell: self-checking test of one left-to-right adder cell.
//
// Random signed-digit streams x and y of L digits (all four digit encodings,
// including p = n = 1) are fed MSD first, followed by zeros. The output digits
// are folded into an integer by shift-and-add and compared with X + Y worked
// out from the input digits. The timing of the paper's online delay of 2 is
// checked digit by digit: the output must be zero before the cycle in which
// its first (extra, most significant) digit is due and zero after its last.
module tb_lra_cell;
  import lra_pkg::*;

  localparam int L      = 12;
  localparam int TRIALS = 400;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  sd_t  x, y, z;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  lra_cell dut (.clk(clk), .rst_n(rst_n), .x(x), .y(y), .z(z));

  initial begin : watchdog
    repeat (TRIALS * (L + 10) + 100) @(posedge clk);
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
    sd_t  xs [L], ys [L];
    longint xv, yv, zv, early, late;
    x = '0; y = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < TRIALS; t++) begin
      xv = 0; yv = 0;
      for (int i = 0; i < L; i++) begin
        xs[i] = sd_t'($urandom_range(3, 0));
        ys[i] = sd_t'($urandom_range(3, 0));
        if (t == 0) begin xs[i] = '{1'b1, 1'b0}; ys[i] = '{1'b1, 1'b0}; end  // max positive
        if (t == 1) begin xs[i] = '{1'b0, 1'b1}; ys[i] = '{1'b0, 1'b1}; end  // max negative
        xv = 2 * xv + longint'(xs[i].p) - longint'(xs[i].n);
        yv = 2 * yv + longint'(ys[i].p) - longint'(ys[i].n);
      end
      // Cycle c: apply digit c, then the clock edge; the output seen after
      // edge c belongs to cycle c+1. Digit 0 of z (weight 2*2^(L-1)) is due
      // in cycle 2, i.e. after edge 1.
      zv = 0; early = 0; late = 0;
      for (int c = 0; c < L + 6; c++) begin
        x = (c < L) ? xs[c] : '0;
        y = (c < L) ? ys[c] : '0;
        @(posedge clk);
        #1;
        if (c < 1)                 early += (z.p || z.n) ? 1 : 0;
        else if (c <= L + 1)       zv = 2 * zv + longint'(z.p) - longint'(z.n);
        else                       late += (z.p != z.n) ? 1 : 0;
      end
      @(negedge clk);
      check(zv == xv + yv, $sformatf("trial %0d: sum %0d, expected %0d", t, zv, xv + yv));
      check(early == 0, $sformatf("trial %0d: output digit before the online delay", t));
      check(late == 0, $sformatf("trial %0d: nonzero digit after the end of the stream", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
