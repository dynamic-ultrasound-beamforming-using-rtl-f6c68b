// tb_lra_tree: self-checking test of the 64-input LRA tree (default size).
//
// Each trial drives 64 random signed-digit streams of L digits, then zeros,
// and folds the root's digits into an integer by shift-and-add. The result
// must equal the sum of the 64 stream values, computed in the testbench. The
// timing is checked too: the root's first digit is due 2*6 = 12 cycles after
// the first input digit (online delay 2 per level), the stream is L+6 digits
// long, and the root carries only zero digits before and after it.
module tb_lra_tree;
  import lra_pkg::*;

  localparam int N      = 64;
  localparam int LV     = $clog2(N);
  localparam int L      = 16;
  localparam int TRIALS = 150;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  sd_t  in [N];
  sd_t  out;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  lra_tree #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .in(in), .out(out));

  initial begin : watchdog
    repeat (TRIALS * (L + 4 * LV) + 200) @(posedge clk);
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
    sd_t    st [N][L];
    longint ref_sum, got, stray;
    int     first_c;
    for (int j = 0; j < N; j++) in[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    first_c = 2 * LV - 1;   // root digit 0 is seen after edge 2*LV-1
    for (int t = 0; t < TRIALS; t++) begin
      ref_sum = 0;
      for (int j = 0; j < N; j++) begin
        longint v;
        v = 0;
        for (int i = 0; i < L; i++) begin
          st[j][i] = sd_t'($urandom_range(3, 0));
          if (t == 0) st[j][i] = '{1'b1, 1'b0};
          if (t == 1) st[j][i] = '{1'b0, 1'b1};
          v = 2 * v + longint'(st[j][i].p) - longint'(st[j][i].n);
        end
        ref_sum += v;
      end
      got = 0; stray = 0;
      for (int c = 0; c < L + 3 * LV + 2; c++) begin
        for (int j = 0; j < N; j++) in[j] = (c < L) ? st[j][c] : '0;
        @(posedge clk);
        #1;
        if (c >= first_c && c < first_c + L + LV) got = 2 * got + longint'(out.p) - longint'(out.n);
        else stray += (out.p != out.n) ? 1 : 0;
      end
      @(negedge clk);
      check(got == ref_sum, $sformatf("trial %0d: tree sum %0d, expected %0d", t, got, ref_sum));
      check(stray == 0, $sformatf("trial %0d: nonzero root digit outside its window", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
