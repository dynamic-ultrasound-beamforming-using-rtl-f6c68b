// output_collector: gathers the results of all cores into one stream of
// beamformed pixel sums ("Output Collector").
//
// It reads the cores in the same cyclic order the dispatcher fills them, so
// pixels leave in the order they arrived, and tags each with its index in
// the frame (0..FRAME_SUMS-1) and a frame_last flag on the final one. The
// in-order cyclic read-out and the tags are this design's choices; the paper
// only says the collector assembles the cores' results into the output.
//
// Timing: combinational selection of the pointed core (m_valid =
// r_valid[ptr]); a result leaves on a cycle with m_valid && m_ready, which is
// also the read strobe r_ready of that core.
module output_collector
  import lra_pkg::*;
#(
  parameter int unsigned NUM_CORES  = NUM_CORES_DEF,
  parameter int unsigned SUM_W      = DATA_W_DEF + 6,
  parameter int unsigned FRAME_SUMS = FRAME_SUMS_DEF,
  parameter int unsigned CW         = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1,
  parameter int unsigned FW         = (FRAME_SUMS > 1) ? $clog2(FRAME_SUMS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NUM_CORES-1:0]    r_valid,
  output logic [NUM_CORES-1:0]    r_ready,
  input  logic [SUM_W-1:0]        r_sum [NUM_CORES],
  input  k_t                      r_k   [NUM_CORES],
  output logic                    m_valid,
  input  logic                    m_ready,
  output logic signed [SUM_W-1:0] m_sum,
  output k_t                      m_k,
  output logic [FW-1:0]           m_index,
  output logic                    m_frame_last
);

  logic [CW-1:0] ptr_q;
  logic [FW-1:0] idx_q;
  logic          hs;

  assign m_valid      = r_valid[ptr_q];
  assign m_sum        = r_sum[ptr_q];
  assign m_k          = r_k[ptr_q];
  assign m_index      = idx_q;
  assign m_frame_last = (idx_q == FW'(FRAME_SUMS - 1));
  assign hs           = m_valid && m_ready;

  always_comb begin
    r_ready        = '0;
    r_ready[ptr_q] = m_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q <= '0;
      idx_q <= '0;
    end else if (hs) begin
      ptr_q <= (ptr_q == CW'(NUM_CORES - 1)) ? '0 : ptr_q + 1'b1;
      idx_q <= m_frame_last ? '0 : idx_q + 1'b1;
    end
  end

  // A result offered and not taken must stay offered, unchanged.
  logic             held_q;
  logic [SUM_W-1:0] held_sum_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held_q     <= 1'b0;
      held_sum_q <= '0;
    end else begin
      held_q     <= m_valid && !m_ready;
      held_sum_q <= m_sum;
      if (held_q) begin
        assert (m_valid && (m_sum == held_sum_q))
          else $error("output_collector: offered result withdrawn or changed");
      end
    end
  end

endmodule
