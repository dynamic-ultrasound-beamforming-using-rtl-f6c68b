// lra64_system: the multi-core MSD-first beamforming summation engine.
//
// NUM_CORES identical LRA64 cores (15 by default, the number the paper finds
// fits the XC7Z010; its system figure draws six) work on independent pixels.
// A round-robin pixel dispatcher fills the cores from one input sample stream,
// one shared precision control (K control) gives every core the same K, and
// an output collector reads the results back in input order.
//
// Interface:
//   k_wr/k_wdata   write a new precision K (1..16, clamped); it takes effect
//                  with the first sample of the next frame. k_active shows
//                  the K in force.
//   s_*            channel samples, N per pixel, channel 0 first,
//                  valid/ready, one per cycle.
//   m_*            one result per pixel: the sum of the N samples computed at
//                  precision m_k (exact when m_k = 16), its index in the frame
//                  and a flag on the last pixel of a frame.
//   frame_start, in_stall, core_stall  status strobes (a frame begins, the
//                  input waits for a busy core, a core waits for its result
//                  to be read); core_busy marks cores past their load phase,
//                  dispatch_core the core the next sample goes to, k_pending
//                  the K that the next frame will use.
// Timing: a core spends N cycles loading, K + 3*log2(N) computing and one
// cycle handing over its result; with the single input stream the system
// accepts at most one sample per cycle, i.e. one pixel every N cycles once
// enough cores are present to cover the compute phase.
module lra64_system
  import lra_pkg::*;
#(
  parameter int unsigned N          = N_CH_DEF,
  parameter int unsigned DATA_W     = DATA_W_DEF,
  parameter int unsigned NUM_CORES  = NUM_CORES_DEF,
  parameter int unsigned FRAME_SUMS = FRAME_SUMS_DEF,
  parameter int unsigned SUM_W      = DATA_W + $clog2(N),
  parameter int unsigned FW         = (FRAME_SUMS > 1) ? $clog2(FRAME_SUMS) : 1,
  parameter int unsigned CW         = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // precision control
  input  logic                    k_wr,
  input  k_t                      k_wdata,
  output k_t                      k_active,
  output k_t                      k_pending,
  // sample stream
  input  logic                    s_valid,
  output logic                    s_ready,
  input  logic [DATA_W-1:0]       s_data,
  // beamformed sums
  output logic                    m_valid,
  input  logic                    m_ready,
  output logic signed [SUM_W-1:0] m_sum,
  output k_t                      m_k,
  output logic [FW-1:0]           m_index,
  output logic                    m_frame_last,
  // status
  output logic                    frame_start,
  output logic                    in_stall,
  output logic [NUM_CORES-1:0]    core_stall,
  output logic [NUM_CORES-1:0]    core_busy,
  output logic [CW-1:0]           dispatch_core
);

  logic [NUM_CORES-1:0] c_valid, c_ready, r_valid, r_ready;
  logic [DATA_W-1:0]    c_data;
  logic [SUM_W-1:0]     r_sum [NUM_CORES];
  k_t                   r_k   [NUM_CORES];

  precision_control #(.K_MAX(DATA_W)) u_kctl (
    .clk        (clk),
    .rst_n      (rst_n),
    .k_wr       (k_wr),
    .k_wdata    (k_wdata),
    .frame_start(frame_start),
    .k_active   (k_active),
    .k_pending  (k_pending)
  );

  pixel_dispatcher #(
    .N(N), .DATA_W(DATA_W), .NUM_CORES(NUM_CORES), .FRAME_SUMS(FRAME_SUMS)
  ) u_disp (
    .clk        (clk),
    .rst_n      (rst_n),
    .s_valid    (s_valid),
    .s_ready    (s_ready),
    .s_data     (s_data),
    .c_valid    (c_valid),
    .c_ready    (c_ready),
    .c_data     (c_data),
    .target     (dispatch_core),
    .frame_start(frame_start),
    .in_stall   (in_stall)
  );

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    core_state_e state;
    lra64_core #(.N(N), .DATA_W(DATA_W)) u_core (
      .clk    (clk),
      .rst_n  (rst_n),
      .k_in   (k_active),
      .s_valid(c_valid[c]),
      .s_ready(c_ready[c]),
      .s_data (c_data),
      .r_valid(r_valid[c]),
      .r_ready(r_ready[c]),
      .r_sum  (r_sum[c]),
      .r_k    (r_k[c]),
      .state  (state),
      .stall  (core_stall[c])
    );
    assign core_busy[c] = (state != ST_LOAD);
  end

  output_collector #(
    .NUM_CORES(NUM_CORES), .SUM_W(SUM_W), .FRAME_SUMS(FRAME_SUMS)
  ) u_coll (
    .clk         (clk),
    .rst_n       (rst_n),
    .r_valid     (r_valid),
    .r_ready     (r_ready),
    .r_sum       (r_sum),
    .r_k         (r_k),
    .m_valid     (m_valid),
    .m_ready     (m_ready),
    .m_sum       (m_sum),
    .m_k         (m_k),
    .m_index     (m_index),
    .m_frame_last(m_frame_last)
  );

endmodule
