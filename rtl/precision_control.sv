// precision_control: the run-time precision setting K shared by all cores
// ("Precision Control" in the core diagram, "K Control" in the system
// diagram).
//
// K is the number of input bit planes a core processes before it stops
// feeding data; 1 <= K <= K_MAX (16 for 16-bit samples). A host writes a new
// value at any time into a pending register; it is clamped to 1..K_MAX. The
// pending value becomes the active one on 'frame_start', so a frame is
// computed with a single K (the paper lets K change per frame or per mode).
// Reset selects full precision. The two-register scheme, the clamping and the
// reset value are this design's choices.
//
// Timing: k_active changes at the edge where frame_start is high; a write in
// the same cycle is not seen until the next frame_start.
module precision_control
  import lra_pkg::*;
#(
  parameter int unsigned K_MAX = DATA_W_DEF
) (
  input  logic clk,
  input  logic rst_n,
  input  logic k_wr,
  input  k_t   k_wdata,
  input  logic frame_start,
  output k_t   k_active,
  output k_t   k_pending
);

  k_t k_clamped;
  always_comb begin
    if (k_wdata == '0)                 k_clamped = k_t'(1);
    else if (k_wdata > k_t'(K_MAX))    k_clamped = k_t'(K_MAX);
    else                               k_clamped = k_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_pending <= k_t'(K_MAX);
      k_active  <= k_t'(K_MAX);
    end else begin
      if (k_wr) begin
        k_pending <= k_clamped;
      end
      if (frame_start) begin
        k_active <= k_pending;
      end
    end
  end

endmodule
