// lra_tree: N-input MSD-first adder tree built from N-1 LRA cells (LRA64 for
// N = 64).
//
// The cells form a balanced binary tree of log2(N) levels (Fig. 2(b) of the
// paper: 64 inputs, 6 levels, 63 cells). Every cell has registered outputs, so
// every level boundary is a register boundary and the longest combinational
// path is one cell deep whatever N is. The nodes are numbered as a heap:
// node 0 is the root, node i has children 2i+1 and 2i+2, and the N leaves are
// nodes N-1 .. 2N-2 (leaf j = node N-1+j).
//
// Interface: in[j] is the signed-digit stream of channel j, out is the stream
// of the sum. Timing: the root emits its first (most significant) digit
// 2*log2(N) cycles after the first input digit; the output stream is log2(N)
// digits longer than the input streams, so the last digit leaves
// 3*log2(N) - 1 cycles after the last input digit. N must be a power of two.
module lra_tree
  import lra_pkg::*;
#(
  parameter int unsigned N = N_CH_DEF
) (
  input  logic clk,
  input  logic rst_n,
  input  sd_t  in  [N],
  output sd_t  out
);

  initial begin
    assert ((N >= 2) && ((N & (N - 1)) == 0))
      else $error("lra_tree: N=%0d must be a power of two", N);
  end

  sd_t node [2*N-1];

  for (genvar j = 0; j < N; j++) begin : g_leaf
    assign node[N-1+j] = in[j];
  end

  for (genvar i = 0; i < N - 1; i++) begin : g_cell
    lra_cell u_cell (
      .clk  (clk),
      .rst_n(rst_n),
      .x    (node[2*i+1]),
      .y    (node[2*i+2]),
      .z    (node[i])
    );
  end

  assign out = node[0];

endmodule
