// tb_lra64_core: self-checking test of one 64-channel MSD-first core at its
// default size.
//
// Phase 1 sends pixels back to back with the result always read at once and
// checks, for every k = 1..16, the sum and its latency: counted from the
// cycle in which the last sample is accepted, the result is visible k + 20
// cycles later (k + 18 compute cycles, one hand-over cycle, then the output
// register), so a core is occupied 64 + k + 19 cycles per pixel.
// Phase 2 sends pixels with random gaps, random k and a slow, random reader,
// so the core must stall in DRAIN; every result is compared, in order, with
// the reference sum(floor(x_i / 2^(16-k))) * 2^(16-k), which for k = 16 is
// the exact sum. Extreme pixels (all -32768, all 32767) are included.
module tb_lra64_core;
  import lra_pkg::*;

  localparam int N = 64;
  localparam int W = 16;
  localparam int SUM_W = W + 6;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  k_t   k_in, r_k;
  logic s_valid, s_ready, r_valid, r_ready, stall;
  logic [W-1:0] s_data;
  logic signed [SUM_W-1:0] r_sum;
  core_state_e state;
  int   checks = 0, failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  lra64_core #(.N(N), .DATA_W(W)) dut (
    .clk(clk), .rst_n(rst_n), .k_in(k_in), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
    .r_valid(r_valid), .r_ready(r_ready), .r_sum(r_sum), .r_k(r_k), .state(state), .stall(stall));

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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

  function automatic longint ref_sum(input logic [W-1:0] px [N], input int k);
    longint s = 0;
    for (int i = 0; i < N; i++) s += (longint'($signed(px[i])) >>> (W - k));
    return s <<< (W - k);
  endfunction

  // random pixel; kind 1 = all most negative, kind 2 = all most positive
  task automatic make_pixel(output logic [W-1:0] px [N], input int kind);
    for (int i = 0; i < N; i++) begin
      px[i] = W'($urandom);
      if (kind == 1) px[i] = 16'h8000;
      if (kind == 2) px[i] = 16'h7fff;
    end
  endtask

  // send one pixel; returns the cycle count at which the last sample was taken
  task automatic send_pixel(input logic [W-1:0] px [N], input int gap_pct, output longint t_last);
    for (int i = 0; i < N; i++) begin
      while ($urandom_range(99, 0) < gap_pct) begin
        s_valid = 1'b0;
        @(negedge clk);
      end
      s_valid = 1'b1;
      s_data  = px[i];
      #1;
      while (!s_ready) begin
        @(negedge clk);
        #1;
      end
      t_last = cyc;
      @(negedge clk);
    end
    s_valid = 1'b0;
  endtask

  longint exp_q [$];
  int     expk_q [$];
  int     stalls = 0;
  bit     phase2_done = 0;

  always @(posedge clk) if (rst_n && stall) stalls++;

  initial begin
    logic [W-1:0] px [N];
    longint t_last, t_valid;
    s_valid = 1'b0; s_data = '0; r_ready = 1'b0; k_in = 5'd16;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // Phase 1: sums and latency for every k, result read immediately.
    r_ready = 1'b1;
    for (int kk = 1; kk <= 16; kk++) begin
      for (int rep = 0; rep < 3; rep++) begin
        make_pixel(px, rep);
        k_in = k_t'(kk);
        send_pixel(px, 0, t_last);
        while (!r_valid) @(negedge clk);
        t_valid = cyc;
        check(t_valid - t_last == kk + 20,
              $sformatf("k=%0d: result %0d cycles after the last sample, expected %0d", kk, t_valid - t_last, kk + 20));
        check(longint'(r_sum) == ref_sum(px, kk),
              $sformatf("k=%0d: sum %0d, expected %0d", kk, r_sum, ref_sum(px, kk)));
        check(int'(r_k) == kk, "result tagged with the wrong k");
        @(negedge clk);
        check(!r_valid, "result not consumed");
      end
    end

    // Phase 2: random traffic with a slow reader.
    fork
      begin
        for (int p = 0; p < 60; p++) begin
          make_pixel(px, (p % 10 == 3) ? 1 : (p % 10 == 7) ? 2 : 0);
          k_in = k_t'($urandom_range(16, 1));
          exp_q.push_back(ref_sum(px, int'(k_in)));
          expk_q.push_back(int'(k_in));
          send_pixel(px, 10, t_last);
        end
      end
      begin
        int got = 0;
        while (got < 60) begin
          r_ready = ($urandom_range(149, 0) == 0);
          #1;
          if (r_valid && r_ready) begin
            longint e;
            int ek;
            e  = exp_q.pop_front();
            ek = expk_q.pop_front();
            check(longint'(r_sum) == e, $sformatf("result %0d: sum %0d, expected %0d", got, r_sum, e));
            check(int'(r_k) == ek, "result tagged with the wrong k");
            got++;
          end
          @(negedge clk);
        end
        r_ready = 1'b0;
      end
    join
    check(stalls > 0, "the core never stalled on a full output register");
    $display("core stalled %0d cycles", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
