// tb_output_collector: self-checking test of the in-order output collector.
//
// Four model cores each hold a queue of results and raise r_valid at random.
// The collector must emit results in strict core order 0,1,2,3,0,...,
// waiting for a core that is not ready yet, read (r_ready) only the core it
// emits from and only when the sink is ready, number the pixels 0..F-1 with
// FRAME_SUMS = 6 and flag the last one of each frame.
module tb_output_collector;
  import lra_pkg::*;

  localparam int C = 4;
  localparam int S = 22;
  localparam int F = 6;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [C-1:0] r_valid, r_ready;
  logic [S-1:0] r_sum [C];
  k_t           r_k [C];
  logic m_valid, m_ready, m_frame_last;
  logic signed [S-1:0] m_sum;
  k_t   m_k;
  logic [2:0] m_index;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  output_collector #(.NUM_CORES(C), .SUM_W(S), .FRAME_SUMS(F)) dut (
    .clk(clk), .rst_n(rst_n), .r_valid(r_valid), .r_ready(r_ready), .r_sum(r_sum), .r_k(r_k),
    .m_valid(m_valid), .m_ready(m_ready), .m_sum(m_sum), .m_k(m_k), .m_index(m_index),
    .m_frame_last(m_frame_last));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
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
    int exp_core = 0, exp_idx = 0, outs = 0, lasts = 0;
    logic [S-1:0] val [C];
    k_t           kv  [C];
    r_valid = '0; m_ready = 1'b0;
    for (int c = 0; c < C; c++) begin val[c] = '0; kv[c] = '0; r_sum[c] = '0; r_k[c] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 5000; t++) begin
      bit took;
      // each idle model core may produce a new result
      for (int c = 0; c < C; c++) begin
        if (!r_valid[c] && $urandom_range(3, 0) == 0) begin
          r_valid[c] = 1'b1;
          val[c] = S'($urandom);
          kv[c]  = k_t'($urandom_range(16, 1));
          r_sum[c] = val[c];
          r_k[c] = kv[c];
        end
      end
      m_ready = ($urandom_range(3, 0) != 0);
      #1;
      check(m_valid == r_valid[exp_core], "m_valid does not follow the expected core");
      check(r_ready == (m_ready ? C'(1) << exp_core : '0), "read strobe on the wrong core");
      check(int'(m_index) == exp_idx, "pixel index wrong");
      check(m_frame_last == (exp_idx == F - 1), "frame_last wrong");
      if (m_valid) begin
        check(m_sum == $signed(val[exp_core]) && m_k == kv[exp_core], "result value wrong");
      end
      took = m_valid && m_ready;
      @(negedge clk);
      if (took) begin
        r_valid[exp_core] = 1'b0;
        if (exp_idx == F - 1) lasts++;
        exp_core = (exp_core + 1) % C;
        exp_idx = (exp_idx + 1) % F;
        outs++;
      end
    end
    check(outs > 100 && lasts > 10, "too little traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
