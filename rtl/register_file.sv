// register_file: the N x 16-bit sample store of one core ("Register File
// Nx16b" in the paper's core diagram).
//
// One synchronous write port fills it one sample per cycle during the load
// phase; all N entries are read in parallel, because the encoder takes the
// same bit plane of every channel in one cycle. Written as an array of
// registers; it has no reset, since every entry is written before it is read.
module register_file
  import lra_pkg::*;
#(
  parameter int unsigned N      = N_CH_DEF,
  parameter int unsigned DATA_W = DATA_W_DEF,
  parameter int unsigned AW     = $clog2(N)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata [N]
);

  logic [DATA_W-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (we) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata = mem;

endmodule
