// lra64_core: one N-channel MSD-first summation core (LRA64 for N = 64).
//
// A core computes one beamformed sum S = x_0 + ... + x_{N-1} of N signed
// DATA_W-bit channel samples at a run-time precision k. It is the datapath of
// the paper's core diagram: serial input port -> N x 16-bit register file ->
// N-input LRA adder tree -> output register, sequenced by an FSM that reads
// the precision control. Between tree and output register sit the bit-plane
// encoder (in front of the tree) and the shift-and-add accumulator (behind
// it), both described in the paper's text.
//
// Operation per pixel:
//   load     N cycles, one sample per accepted handshake on s_*;
//   compute  k + 3*log2(N) cycles: bit planes 0..k-1 of all N samples enter
//            the tree MSD first, then zeros flush it, while the accumulator
//            folds the root's digits into a binary number;
//   drain    1 cycle (more if the output register is still full).
// The result on r_sum is the sum of floor(x_i / 2^(DATA_W-k)), scaled back by
// 2^(DATA_W-k) so that every k gives a number on the same scale; for
// k = DATA_W it is the exact sum. r_k tells which k produced it.
// With N = 64 and k = 16 a pixel takes 64 + 34 + 1 = 99 cycles (the paper
// quotes k + 76 = 92; see fsm_control for why the compute phase is longer).
module lra64_core
  import lra_pkg::*;
#(
  parameter int unsigned N      = N_CH_DEF,
  parameter int unsigned DATA_W = DATA_W_DEF,
  parameter int unsigned LEVELS = $clog2(N),
  parameter int unsigned SUM_W  = DATA_W + LEVELS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  k_t                      k_in,
  // sample stream in
  input  logic                    s_valid,
  output logic                    s_ready,
  input  logic [DATA_W-1:0]       s_data,
  // result out
  output logic                    r_valid,
  input  logic                    r_ready,
  output logic signed [SUM_W-1:0] r_sum,
  output k_t                      r_k,
  // status
  output core_state_e             state,
  output logic                    stall
);

  localparam int unsigned AW      = $clog2(N);
  localparam int unsigned ACC_W   = SUM_W + 1;
  localparam int unsigned PLANE_W = $clog2(DATA_W + (CELL_DELTA + 1) * LEVELS + 1);

  // Input port -> register file
  logic              load_en, we, load_last;
  logic [AW-1:0]     waddr;
  logic [DATA_W-1:0] wdata;
  logic [DATA_W-1:0] samples [N];

  serial_input_port #(.N(N), .DATA_W(DATA_W)) u_port (
    .clk     (clk),
    .rst_n   (rst_n),
    .enable  (load_en),
    .in_valid(s_valid),
    .in_ready(s_ready),
    .in_data (s_data),
    .we      (we),
    .waddr   (waddr),
    .wdata   (wdata),
    .last    (load_last)
  );

  register_file #(.N(N), .DATA_W(DATA_W)) u_rf (
    .clk  (clk),
    .we   (we),
    .waddr(waddr),
    .wdata(wdata),
    .rdata(samples)
  );

  // Controller
  logic               acc_clear, acc_en, enc_active, out_load, out_can_load;
  logic [PLANE_W-1:0] plane;
  k_t                 k_cur;

  fsm_control #(.N(N), .DATA_W(DATA_W), .LEVELS(LEVELS), .PLANE_W(PLANE_W)) u_fsm (
    .clk         (clk),
    .rst_n       (rst_n),
    .load_last   (load_last),
    .k_in        (k_in),
    .out_can_load(out_can_load),
    .state       (state),
    .load_en     (load_en),
    .acc_clear   (acc_clear),
    .acc_en      (acc_en),
    .enc_active  (enc_active),
    .plane       (plane),
    .k_cur       (k_cur),
    .out_load    (out_load),
    .stall       (stall)
  );

  // Encoder -> tree -> accumulator
  sd_t digits [N];
  sd_t root;
  logic signed [ACC_W-1:0] acc;

  msdf_encoder #(.N(N), .DATA_W(DATA_W), .PLANE_W(PLANE_W)) u_enc (
    .samples(samples),
    .active (enc_active),
    .plane  (plane),
    .k      (k_cur),
    .digits (digits)
  );

  lra_tree #(.N(N)) u_tree (
    .clk  (clk),
    .rst_n(rst_n),
    .in   (digits),
    .out  (root)
  );

  sd_accumulator #(.ACC_W(ACC_W)) u_acc (
    .clk  (clk),
    .rst_n(rst_n),
    .clear(acc_clear),
    .en   (acc_en),
    .d    (root),
    .acc  (acc)
  );

  // Rescale the k-plane result to full weight and register it.
  logic signed [ACC_W+DATA_W-1:0] acc_wide;
  logic signed [SUM_W-1:0]        scaled;
  logic [SUM_W+K_W-1:0]           out_q;

  assign acc_wide = (ACC_W + DATA_W)'(acc);
  assign scaled   = SUM_W'(acc_wide <<< (DATA_W - int'(k_cur)));

  output_register #(.W(SUM_W + K_W)) u_out (
    .clk     (clk),
    .rst_n   (rst_n),
    .load    (out_load),
    .d       ({k_cur, scaled}),
    .can_load(out_can_load),
    .valid   (r_valid),
    .q       (out_q),
    .ready   (r_ready)
  );

  assign r_sum = out_q[SUM_W-1:0];
  assign r_k   = out_q[SUM_W +: K_W];

endmodule
