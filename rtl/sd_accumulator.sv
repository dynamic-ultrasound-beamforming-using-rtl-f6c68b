// sd_accumulator: shift-and-add converter from the tree's signed-digit output
// stream to a two's-complement number.
//
// Each enabled cycle it computes S = 2*S + d.p - d.n (the paper's output
// reconstruction), so after the last digit S holds the value of the whole
// MSD-first stream. 'clear' empties it before a new stream (clear wins over
// en). The register is one bit wider than the final sum needs, because a
// prefix of a redundant stream can exceed the final value by one.
//
// Timing: the digit present in a cycle with en=1 is included at that cycle's
// clock edge; acc is a register output.
module sd_accumulator
  import lra_pkg::*;
#(
  parameter int unsigned ACC_W = DATA_W_DEF + 7
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    en,
  input  sd_t                     d,
  output logic signed [ACC_W-1:0] acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (clear) begin
      acc <= '0;
    end else if (en) begin
      acc <= (acc <<< 1) + ACC_W'(d.p) - ACC_W'(d.n);
    end
  end

endmodule
