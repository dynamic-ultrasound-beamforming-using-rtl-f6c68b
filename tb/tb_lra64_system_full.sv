// tb_lra64_system_full: one complete frame through the engine at its default
// size: 15 cores of 64 channels x 16 bits, frames of 244608 channel sums
// (122304 complex pixels, real and imaginary parts summed separately).
//
// The precision is left at its reset value, K = 16, so every sum must be
// exact. Samples are random, generated on the fly, and offered every cycle;
// results are read every cycle. Each of the 244608 results is compared in
// order with the exact 64-channel sum, with its index and the frame-last
// flag. With enough cores the input is never stalled, so the frame must be
// accepted in exactly 244608 * 64 cycles, one sample per cycle.
module tb_lra64_system_full;
  import lra_pkg::*;

  localparam int N     = 64;
  localparam int W     = 16;
  localparam int F     = 244608;
  localparam int SUM_W = W + 6;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic k_wr;
  k_t   k_wdata, k_active, k_pending, m_k;
  logic s_valid, s_ready, m_valid, m_ready, m_frame_last, frame_start, in_stall;
  logic [W-1:0] s_data;
  logic signed [SUM_W-1:0] m_sum;
  logic [17:0]  m_index;
  logic [14:0]  core_stall, core_busy;
  logic [3:0]   dispatch_core;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  lra64_system dut (
    .clk(clk), .rst_n(rst_n), .k_wr(k_wr), .k_wdata(k_wdata), .k_active(k_active),
    .k_pending(k_pending), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
    .m_valid(m_valid), .m_ready(m_ready), .m_sum(m_sum), .m_k(m_k), .m_index(m_index),
    .m_frame_last(m_frame_last), .frame_start(frame_start), .in_stall(in_stall),
    .core_stall(core_stall), .core_busy(core_busy), .dispatch_core(dispatch_core));

  initial begin : watchdog
    repeat (F * N + 5000) @(posedge clk);
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

  longint exp_q [$];
  longint cyc = 0, t_first = 0, t_last = 0;
  int     stalls = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_stall) stalls++;
  end

  initial begin
    int got = 0;
    s_valid = 1'b0; s_data = '0; m_ready = 1'b0; k_wr = 1'b0; k_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    fork
      begin
        longint s;
        for (int p = 0; p < F; p++) begin
          s = 0;
          for (int i = 0; i < N; i++) begin
            s_valid = 1'b1;
            s_data  = W'($urandom);
            s += longint'($signed(s_data));
            if (p == 0 && i == 0) t_first = cyc;
            #1;
            while (!s_ready) begin @(negedge clk); #1; end
            t_last = cyc;
            @(negedge clk);
          end
          exp_q.push_back(s);
        end
        s_valid = 1'b0;
      end
      begin
        m_ready = 1'b1;
        while (got < F) begin
          #1;
          if (m_valid) begin
            longint e;
            e = exp_q.pop_front();
            check(longint'(m_sum) == e, $sformatf("pixel %0d: sum %0d, expected %0d", got, m_sum, e));
            check(int'(m_index) == got && m_frame_last == (got == F - 1) && m_k == 5'd16,
                  $sformatf("pixel %0d: index, frame-last flag or K tag wrong", got));
            got++;
          end
          @(negedge clk);
        end
      end
    join
    check(t_last - t_first == longint'(F) * N - 1,
          $sformatf("frame input took %0d cycles, expected %0d", t_last - t_first + 1, longint'(F) * N));
    check(stalls == 0, "input stalled with all cores present");
    $display("frame of %0d sums: %0d input cycles, %0d input stalls", F, t_last - t_first + 1, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
