// tb_lra64_system: end-to-end test of the multi-core summation engine at a
// reduced number of cores and a short frame (64 channels, 16-bit samples and
// the tree as in the default design; 3 cores; frames of 10 pixel sums).
//
// A producer streams frames of random pixels (with a few extreme ones) and,
// between pixels, writes new precision values K, sometimes mid-frame. A
// consumer reads the results with random back-pressure. Every result is
// compared in order with the reference: the sum over the 64 channels of
// floor(x / 2^(16-K)) * 2^(16-K), where K is the value pending when the frame
// started; its K tag, pixel index and frame-last flag are checked too. The
// testbench counts how often each mechanism of the design occurred and fails
// if one never did: early termination (K < 16), full precision (K = 16), a K
// change taking effect at a frame boundary, a write held back until the next
// frame, input stall, core stall on a full output register, round-robin
// wrap-around, several cores computing at once, and the end of a frame.
module tb_lra64_system;
  import lra_pkg::*;

  localparam int N      = 64;
  localparam int W      = 16;
  localparam int C      = 3;
  localparam int F      = 10;
  localparam int FRAMES = 12;
  localparam int SUM_W  = W + 6;
  localparam int FW     = $clog2(F);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic k_wr;
  k_t   k_wdata, k_active, k_pending, m_k;
  logic s_valid, s_ready, m_valid, m_ready, m_frame_last, frame_start, in_stall;
  logic [W-1:0] s_data;
  logic signed [SUM_W-1:0] m_sum;
  logic [FW-1:0] m_index;
  logic [C-1:0]  core_stall, core_busy;
  logic [1:0]    dispatch_core;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  lra64_system #(.N(N), .DATA_W(W), .NUM_CORES(C), .FRAME_SUMS(F)) dut (
    .clk(clk), .rst_n(rst_n), .k_wr(k_wr), .k_wdata(k_wdata), .k_active(k_active),
    .k_pending(k_pending), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
    .m_valid(m_valid), .m_ready(m_ready), .m_sum(m_sum), .m_k(m_k), .m_index(m_index),
    .m_frame_last(m_frame_last), .frame_start(frame_start), .in_stall(in_stall),
    .core_stall(core_stall), .core_busy(core_busy), .dispatch_core(dispatch_core));

  initial begin : watchdog
    repeat (FRAMES * F * 400 + 2000) @(posedge clk);
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

  // mechanism counters
  int n_early = 0, n_full = 0, n_kswitch = 0, n_deferred = 0, n_in_stall = 0;
  int n_core_stall = 0, n_wrap = 0, n_parallel = 0, n_frame_end = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (in_stall) n_in_stall++;
      if (|core_stall) n_core_stall++;
      if ($countones(core_busy) >= 2) n_parallel++;
      if (s_valid && s_ready && dispatch_core == 2'(C - 1)) n_wrap++;
    end
  end

  typedef struct {
    longint sum;
    int     k;
    int     idx;
  } exp_t;
  exp_t exp_q [$];

  function automatic longint ref_sum(input logic [W-1:0] px [N], input int k);
    longint s = 0;
    for (int i = 0; i < N; i++) s += (longint'($signed(px[i])) >>> (W - k));
    return s <<< (W - k);
  endfunction

  initial begin
    logic [W-1:0] px [N];
    int pend, frame_k, prev_k, v;
    int got;
    s_valid = 1'b0; s_data = '0; m_ready = 1'b0; k_wr = 1'b0; k_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    pend = 16; prev_k = 16; frame_k = 16; got = 0;
    fork
      // producer
      begin
        for (int f = 0; f < FRAMES; f++) begin
          for (int p = 0; p < F; p++) begin
            // occasionally write a new K between pixels
            if ((p == F - 3 && f % 2 == 0) || (p == 2 && f % 3 == 1)) begin
              v = (f % 4 == 0) ? 16 : $urandom_range(20, 0);
              k_wr = 1'b1; k_wdata = k_t'(v);
              @(negedge clk);
              k_wr = 1'b0;
              pend = (v == 0) ? 1 : (v > 16) ? 16 : v;
              if (p != F - 1) n_deferred++;
            end
            if (p == 0) begin
              frame_k = pend;
              if (f > 0 && frame_k != prev_k) n_kswitch++;
              prev_k = frame_k;
            end
            for (int i = 0; i < N; i++) begin
              px[i] = W'($urandom);
              if (p == 4) px[i] = 16'h8000;
              if (p == 5) px[i] = 16'h7fff;
            end
            exp_q.push_back('{ref_sum(px, frame_k), frame_k, p});
            if (frame_k < 16) n_early++; else n_full++;
            for (int i = 0; i < N; i++) begin
              if ($urandom_range(19, 0) == 0) begin s_valid = 1'b0; @(negedge clk); end
              s_valid = 1'b1; s_data = px[i];
              #1;
              while (!s_ready) begin @(negedge clk); #1; end
              @(negedge clk);
            end
            s_valid = 1'b0;
          end
        end
      end
      // consumer
      begin
        while (got < FRAMES * F) begin
          bit took;
          m_ready = (got % 25 < 12) ? ($urandom_range(299, 0) == 0) : ($urandom_range(3, 0) != 0);
          #1;
          took = m_valid && m_ready;
          if (took) begin
            exp_t e;
            e = exp_q.pop_front();
            check(longint'(m_sum) == e.sum, $sformatf("pixel %0d: sum %0d, expected %0d (k=%0d)", got, m_sum, e.sum, e.k));
            check(int'(m_k) == e.k, $sformatf("pixel %0d: k %0d, expected %0d", got, m_k, e.k));
            check(int'(m_index) == e.idx, "pixel index wrong");
            check(m_frame_last == (e.idx == F - 1), "frame_last wrong");
            if (m_frame_last) n_frame_end++;
            got++;
          end
          @(negedge clk);
        end
        m_ready = 1'b0;
      end
    join
    $display("early=%0d full=%0d kswitch=%0d deferred=%0d in_stall=%0d core_stall=%0d wrap=%0d parallel=%0d frame_end=%0d",
             n_early, n_full, n_kswitch, n_deferred, n_in_stall, n_core_stall, n_wrap, n_parallel, n_frame_end);
    check(n_early > 0, "no early-terminated (K < 16) pixel");
    check(n_full > 0, "no full-precision pixel");
    check(n_kswitch > 0, "K never changed at a frame boundary");
    check(n_deferred > 0, "no mid-frame K write");
    check(n_in_stall > 0, "input never stalled");
    check(n_core_stall > 0, "no core ever stalled");
    check(n_wrap > 0, "round-robin never wrapped");
    check(n_parallel > 0, "never two cores busy at once");
    check(n_frame_end == FRAMES, "frame ends missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
