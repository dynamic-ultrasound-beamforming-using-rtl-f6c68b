// msdf_encoder: turns N signed two's-complement samples into N MSD-first
// signed-digit streams, one bit plane per cycle (the "64-Input Encoder" of a
// core).
//
// A W-bit sample b is worth -b[W-1]*2^(W-1) + sum b[i]*2^i. Plane 0 carries the
// sign contribution on the negative channel (digit -b[W-1]); plane j, for
// j = 1..W-1, carries bit b[W-1-j] on the positive channel. Planes at or above
// the precision k, and every cycle while 'active' is low, carry zero digits;
// these zeros flush the registered tree behind the last plane. Sending only
// the first k planes therefore feeds the tree floor(b / 2^(W-k)).
// The sign-first, positive/negative split follows the paper; mapping the
// remaining bits of a two's-complement word to the positive channel is this
// design's reading of it.
//
// Purely combinational: 'plane' selects the bit column of the samples held
// in the register file, so the digits for plane j appear in the same cycle
// that plane = j.
module msdf_encoder
  import lra_pkg::*;
#(
  parameter int unsigned N       = N_CH_DEF,
  parameter int unsigned DATA_W  = DATA_W_DEF,
  parameter int unsigned PLANE_W = 6
) (
  input  logic [DATA_W-1:0]  samples [N],
  input  logic               active,
  input  logic [PLANE_W-1:0] plane,
  input  k_t                 k,
  output sd_t                digits  [N]
);

  logic emit;
  assign emit = active && (plane < PLANE_W'(k)) && (plane < PLANE_W'(DATA_W));

  always_comb begin
    for (int j = 0; j < N; j++) begin
      digits[j] = '{p: 1'b0, n: 1'b0};
      if (emit) begin
        if (plane == '0) begin
          digits[j].n = samples[j][DATA_W-1];
        end else begin
          digits[j].p = samples[j][(DATA_W-1) - int'(plane)];
        end
      end
    end
  end

endmodule
