// tb_precision_sweep: the dynamic-precision sweep run through the engine.
//
// One core (so that the time per pixel can be measured) of the default
// 64-channel, 16-bit size, with every pixel sum its own frame so that K can
// change from one pixel to the next. For each K of the operating points
// 1, 4, 8, 10, 12, 14, 16 and then every K from 1 to 16, a batch of random
// pixels is streamed with the input offered every cycle and the output read
// every cycle. Checked for each pixel: the sum equals
// sum(floor(x / 2^(16-K))) * 2^(16-K); it is within 64 * 2^(16-K) of the exact
// sum (and equal to it at K = 16); the core takes 64 + (K + 18) + 1 cycles per
// pixel. The measured cycle counts are printed next to each K.
module tb_precision_sweep;
  import lra_pkg::*;

  localparam int N     = 64;
  localparam int W     = 16;
  localparam int SUM_W = W + 6;
  localparam int BATCH = 6;
  localparam int NPTS  = 23;
  localparam int PTS [NPTS] = '{1, 4, 8, 10, 12, 14, 16,
                                1, 2, 3, 4, 5, 6, 7, 8, 9, 10, 11, 12, 13, 14, 15, 16};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic k_wr;
  k_t   k_wdata, k_active, k_pending, m_k;
  logic s_valid, s_ready, m_valid, m_ready, m_frame_last, frame_start, in_stall;
  logic [W-1:0] s_data;
  logic signed [SUM_W-1:0] m_sum;
  logic [0:0]   m_index;
  logic [0:0]   core_stall, core_busy, dispatch_core;
  int   checks = 0, failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  lra64_system #(.NUM_CORES(1), .FRAME_SUMS(1)) dut (
    .clk(clk), .rst_n(rst_n), .k_wr(k_wr), .k_wdata(k_wdata), .k_active(k_active),
    .k_pending(k_pending), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
    .m_valid(m_valid), .m_ready(m_ready), .m_sum(m_sum), .m_k(m_k), .m_index(m_index),
    .m_frame_last(m_frame_last), .frame_start(frame_start), .in_stall(in_stall),
    .core_stall(core_stall), .core_busy(core_busy), .dispatch_core(dispatch_core));

  initial begin : watchdog
    repeat (NPTS * BATCH * 120 + 2000) @(posedge clk);
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
    logic [W-1:0] px [N];
    longint exact, trunc, t_res, t_prev;
    int k;
    s_valid = 1'b0; s_data = '0; m_ready = 1'b1; k_wr = 1'b0; k_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int pt = 0; pt < NPTS; pt++) begin
      k = PTS[pt];
      k_wr = 1'b1; k_wdata = k_t'(k);
      @(negedge clk);
      k_wr = 1'b0;
      t_prev = -1;
      for (int b = 0; b < BATCH; b++) begin
        exact = 0; trunc = 0;
        for (int i = 0; i < N; i++) begin
          px[i] = W'($urandom);
          exact += longint'($signed(px[i]));
          trunc += longint'($signed(px[i])) >>> (W - k);
        end
        trunc = trunc <<< (W - k);
        // offer every sample as soon as possible; the pixel's first sample
        // waits while the core is still busy with the previous one
        for (int i = 0; i < N; i++) begin
          s_valid = 1'b1; s_data = px[i];
          #1;
          while (!s_ready) begin @(negedge clk); #1; end
          @(negedge clk);
        end
        s_valid = 1'b0;
        while (!m_valid) @(negedge clk);
        t_res = cyc;
        check(longint'(m_sum) == trunc, $sformatf("K=%0d: sum %0d, expected %0d", k, m_sum, trunc));
        check(int'(m_k) == k, "K tag wrong");
        if (k == 16) check(longint'(m_sum) == exact, "K=16 is not exact");
        check(exact - longint'(m_sum) >= 0 && exact - longint'(m_sum) < longint'(N) << (W - k),
              $sformatf("K=%0d: error %0d outside [0, 64*2^(16-K))", k, exact - longint'(m_sum)));
        // the result is read in this cycle and the core is already loading
        // again, so the next pixel starts at once
        if (t_prev >= 0) begin
          check(t_res - t_prev == N + k + 19,
                $sformatf("K=%0d: %0d cycles per pixel, expected %0d", k, t_res - t_prev, N + k + 19));
          if (b == BATCH - 1)
            $display("K=%2d  compute %0d cycles  per pixel %0d cycles", k, k + 18, t_res - t_prev);
        end
        t_prev = t_res;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
