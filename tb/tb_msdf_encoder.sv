// tb_msdf_encoder: self-checking test of the bit-plane encoder.
//
// For random 16-bit samples (plus the extreme values) and every precision k
// and plane index, each digit is compared with the expected one: plane 0 is
// minus the sign bit, plane j is bit 15-j on the positive channel, planes at
// or beyond k and an inactive encoder give zero. The planes are then folded
// back by shift-and-add: k planes must give floor(x / 2^(16-k)), so k = 16
// gives the sample itself.
module tb_msdf_encoder;
  import lra_pkg::*;

  localparam int N = 8;
  localparam int W = 16;

  logic [W-1:0] samples [N];
  logic         active;
  logic [5:0]   plane;
  k_t           k;
  sd_t          digits [N];
  int           checks = 0, failures = 0;

  msdf_encoder #(.N(N), .DATA_W(W), .PLANE_W(6)) dut (
    .samples(samples), .active(active), .plane(plane), .k(k), .digits(digits));

  initial begin : watchdog
    #10ms;
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
    longint acc [N];
    for (int t = 0; t < 60; t++) begin
      for (int j = 0; j < N; j++) samples[j] = W'($urandom);
      if (t == 0) begin samples[0] = 16'h8000; samples[1] = 16'h7fff; samples[2] = 16'hffff; samples[3] = 16'h0000; end
      for (int kk = 1; kk <= 16; kk++) begin
        k = k_t'(kk);
        for (int j = 0; j < N; j++) acc[j] = 0;
        for (int p = 0; p < 34; p++) begin
          plane = 6'(p);
          active = 1'b1;
          #1;
          for (int j = 0; j < N; j++) begin
            sd_t e;
            logic signed [W-1:0] sv;
            e = '0;
            if (p < kk) begin
              if (p == 0) e.n = samples[j][W-1];
              else        e.p = samples[j][W-1-p];
            end
            check(digits[j] == e, $sformatf("k=%0d plane=%0d ch=%0d digit %b expected %b", kk, p, j, digits[j], e));
            acc[j] = 2 * acc[j] + longint'(digits[j].p) - longint'(digits[j].n);
            if (p == kk - 1) begin
              sv = samples[j];
              check(acc[j] == (longint'(sv) >>> (W - kk)),
                    $sformatf("k=%0d ch=%0d planes give %0d, expected %0d", kk, j, acc[j], longint'(sv) >>> (W - kk)));
            end
          end
          active = 1'b0;
          #1;
          for (int j = 0; j < N; j++) check(digits[j] == '0, "digit while inactive");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
