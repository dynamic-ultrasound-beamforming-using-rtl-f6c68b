// lra_cell: left-to-right (most-significant-digit-first) adder of two radix-2
// signed-digit streams, the building block of the LRA tree.
//
// Each cycle the cell takes one digit of each operand, x = x.p - x.n and
// y = y.p - y.n, most significant digit first, and emits one digit z of the
// sum. It is the classic two-step online adder: the first full adder adds
// x.p, NOT x.n and y.p, which gives a transfer h (weight 2) and a sum g; the
// second full adder adds the transfer h arriving one cycle later (it belongs
// to the next-lower digit position) to the delayed sum and the delayed y.n,
// both inverted. Because no carry ever travels more than one position, the
// combinational path is two full adders deep.
//
// Structure (follows Fig. 2(a) of the paper: two full adders, five registers,
// a register on the first adder's sum output and on y.n, one register on the
// z.n output and two on the z.p output, inversion bubbles on x.n, on the
// first adder's sum output and on the second adder's inputs):
//   gn_q = NOT g (delayed), yn_q = y.n (delayed)
//   {t, w} = h + NOT gn_q + NOT yn_q
//   z.n = NOT t delayed once, z.p = w delayed twice.
// The inversion of t on its way to z.n is this design's derivation: with it,
// every register holds 0 when the inputs are zero, so reset and flush
// leave the cell in the same all-zero state.
//
// Timing: online delay 2. If operand digits of weight 2^-1, 2^-2, ... enter in
// cycles 0, 1, ..., output digits of weight 2^0, 2^-1, ... leave in cycles
// 2, 3, ...: the result stream is one digit longer (at the top) and starts two
// cycles later. Feed zeros after the last operand digit to flush it.
module lra_cell
  import lra_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  sd_t  x,
  input  sd_t  y,
  output sd_t  z
);

  logic h, g;        // first full adder: transfer and sum
  logic t, w;        // second full adder: transfer and sum
  logic gn_q, yn_q;  // stage-1 registers
  logic tn_q;        // output register on the negative channel
  logic w_q1, w_q2;  // two output registers on the positive channel

  // Full adder 1: x.p + (1 - x.n) + y.p = 2h + g.
  assign {h, g} = 2'(x.p) + 2'(!x.n) + 2'(y.p);

  // Full adder 2: h(next position) + (1 - gn) + (1 - yn) = 2t + w.
  assign {t, w} = 2'(h) + 2'(!gn_q) + 2'(!yn_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gn_q <= 1'b0;
      yn_q <= 1'b0;
      tn_q <= 1'b0;
      w_q1 <= 1'b0;
      w_q2 <= 1'b0;
    end else begin
      gn_q <= !g;
      yn_q <= y.n;
      tn_q <= !t;
      w_q1 <= w;
      w_q2 <= w_q1;
    end
  end

  assign z.p = w_q2;
  assign z.n = tn_q;

endmodule
