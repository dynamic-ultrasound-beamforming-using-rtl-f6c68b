// pixel_dispatcher: hands pixels to the cores in round-robin order ("Pixel
// Dispatcher (Round-Robin)" of the multi-core system).
//
// The input is one stream of channel samples, N consecutive samples per pixel
// (channel 0 first). The dispatcher steers the whole pixel to one core, then
// moves to the next core, wrapping after core NUM_CORES-1. Assignment is
// strictly cyclic: if the next core is still busy the stream waits (s_ready
// low) rather than skipping it, which keeps results in input order for the
// output collector. It also counts pixels modulo FRAME_SUMS and pulses
// frame_start when the first sample of a frame is accepted, the point at
// which a new precision K takes effect. The round-robin policy is the
// paper's; the stream format, strict ordering and frame counting are this
// design's choices.
//
// Timing: combinational steering (s_ready = c_ready[ptr]); the pointer and
// counters advance on accepted samples.
module pixel_dispatcher
  import lra_pkg::*;
#(
  parameter int unsigned N          = N_CH_DEF,
  parameter int unsigned DATA_W     = DATA_W_DEF,
  parameter int unsigned NUM_CORES  = NUM_CORES_DEF,
  parameter int unsigned FRAME_SUMS = FRAME_SUMS_DEF,
  parameter int unsigned CW         = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1,
  parameter int unsigned FW         = (FRAME_SUMS > 1) ? $clog2(FRAME_SUMS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 s_valid,
  output logic                 s_ready,
  input  logic [DATA_W-1:0]    s_data,
  output logic [NUM_CORES-1:0] c_valid,
  input  logic [NUM_CORES-1:0] c_ready,
  output logic [DATA_W-1:0]    c_data,
  output logic [CW-1:0]        target,
  output logic                 frame_start,
  output logic                 in_stall
);

  localparam int unsigned AW = $clog2(N);

  logic [CW-1:0] ptr_q;
  logic [AW-1:0] cnt_q;
  logic [FW-1:0] pix_q;
  logic          hs, pix_done;

  assign s_ready  = c_ready[ptr_q];
  assign hs       = s_valid && s_ready;
  assign pix_done = hs && (cnt_q == AW'(N - 1));
  assign c_data   = s_data;
  assign target   = ptr_q;

  always_comb begin
    c_valid        = '0;
    c_valid[ptr_q] = s_valid;
  end

  assign frame_start = hs && (cnt_q == '0) && (pix_q == '0);
  assign in_stall    = s_valid && !s_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q <= '0;
      cnt_q <= '0;
      pix_q <= '0;
    end else begin
      // At most one core is offered a sample, and only the one pointed at.
      assert ((c_valid & ~(NUM_CORES'(1) << ptr_q)) == '0)
        else $error("pixel_dispatcher: sample offered to a core out of turn");
      if (hs) begin
        cnt_q <= cnt_q + 1'b1;
        if (pix_done) begin
          cnt_q <= '0;
          ptr_q <= (ptr_q == CW'(NUM_CORES - 1)) ? '0 : ptr_q + 1'b1;
          pix_q <= (pix_q == FW'(FRAME_SUMS - 1)) ? '0 : pix_q + 1'b1;
        end
      end
    end
  end

endmodule
