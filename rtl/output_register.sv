// output_register: holds one finished result of a core until it is read
// ("Output Register").
//
// 'load' writes d and sets valid; a read is a cycle with valid && ready.
// can_load is high when the register is empty or is being read in this cycle,
// so a new result may replace the old one in the same cycle it leaves. The
// valid/ready read side is this design's choice.
module output_register #(
  parameter int unsigned W = 27
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] d,
  output logic         can_load,
  output logic         valid,
  output logic [W-1:0] q,
  input  logic         ready
);

  assign can_load = !valid || ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      q     <= '0;
    end else begin
      assert (!(load && !can_load))
        else $error("output_register: load while holding an unread result");
      if (load) begin
        valid <= 1'b1;
        q     <= d;
      end else if (ready) begin
        valid <= 1'b0;
      end
    end
  end

endmodule
