// serial_input_port: the sample entry of one core ("Serial Input Port").
//
// Accepts one DATA_W-bit sample per cycle over a valid/ready handshake while
// the controller holds 'enable' (the load phase), and turns each accepted
// sample into a register-file write at the next channel address. The address
// counts 0..N-1 and wraps; 'last' marks the write of channel N-1, i.e. a
// complete pixel. The handshake and the counter are this design's choice;
// the paper only names the port and its 64-cycle load phase.
//
// Timing: in_ready = enable; the write happens at the edge where
// in_valid && in_ready.
module serial_input_port
  import lra_pkg::*;
#(
  parameter int unsigned N      = N_CH_DEF,
  parameter int unsigned DATA_W = DATA_W_DEF,
  parameter int unsigned AW     = $clog2(N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  output logic              we,
  output logic [AW-1:0]     waddr,
  output logic [DATA_W-1:0] wdata,
  output logic              last
);

  logic [AW-1:0] addr_q;

  assign in_ready = enable;
  assign we       = in_valid && in_ready;
  assign waddr    = addr_q;
  assign wdata    = in_data;
  assign last     = we && (addr_q == AW'(N - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr_q <= '0;
    end else if (we) begin
      addr_q <= last ? '0 : addr_q + 1'b1;
    end
  end

  // A producer must hold its sample until it is taken.
  logic             pend_q;
  logic [DATA_W-1:0] data_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q <= 1'b0;
      data_q <= '0;
    end else begin
      pend_q <= in_valid && !in_ready;
      data_q <= in_data;
      if (pend_q) begin
        assert (in_valid && (in_data == data_q))
          else $error("serial_input_port: sample withdrawn or changed before it was accepted");
      end
    end
  end

endmodule
