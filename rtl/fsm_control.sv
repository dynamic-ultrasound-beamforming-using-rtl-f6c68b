// fsm_control: the phase controller of one core ("FSM Control").
//
// LOAD    the serial input port is enabled; the N samples of a pixel are
//         written into the register file, one per cycle. When the last one is
//         accepted the precision k is sampled (so a pixel keeps the k it
//         started with), the accumulator is cleared and COMPUTE begins.
// COMPUTE the encoder is stepped through bit planes 0, 1, ...; planes below k
//         carry data, later ones are zeros that flush the tree. The
//         accumulator takes the root digit every cycle. The phase lasts
//         compute_cycles(k, LEVELS) = k + 3*LEVELS cycles, which is exactly
//         until the least significant root digit has been accumulated.
//         Stopping after k planes is the paper's early termination.
// DRAIN   the finished sum is handed to the output register as soon as that
//         register can take it; until then the core stalls ('stall' high).
//
// The three phases follow the paper (load, compute with zero flush, output
// register). The exact compute length and the DRAIN cycle are this design's:
// the paper quotes k+12 compute cycles, but a 6-level tree of cells with
// online delay 2 needs k+18 cycles before the last output digit is out, and
// the paper also requires k=16 to be exact, which is what is kept here.
module fsm_control
  import lra_pkg::*;
#(
  parameter int unsigned N       = N_CH_DEF,
  parameter int unsigned DATA_W  = DATA_W_DEF,
  parameter int unsigned LEVELS  = $clog2(N),
  parameter int unsigned PLANE_W = $clog2(DATA_W + (CELL_DELTA + 1) * LEVELS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load_last,     // last sample of a pixel accepted
  input  k_t                 k_in,          // precision from the precision control
  input  logic               out_can_load,  // output register can take a result
  output core_state_e        state,
  output logic               load_en,
  output logic               acc_clear,
  output logic               acc_en,
  output logic               enc_active,
  output logic [PLANE_W-1:0] plane,
  output k_t                 k_cur,
  output logic               out_load,
  output logic               stall
);

  core_state_e        state_q;
  logic [PLANE_W-1:0] cnt_q;
  k_t                 k_q;
  logic [PLANE_W-1:0] last_cnt;

  assign last_cnt = PLANE_W'(compute_cycles(int'(k_q), LEVELS) - 1);

  always_comb begin
    load_en    = (state_q == ST_LOAD);
    acc_clear  = (state_q == ST_LOAD) && load_last;
    acc_en     = (state_q == ST_COMPUTE);
    enc_active = (state_q == ST_COMPUTE);
    out_load   = (state_q == ST_DRAIN) && out_can_load;
    stall      = (state_q == ST_DRAIN) && !out_can_load;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= ST_LOAD;
      cnt_q   <= '0;
      k_q     <= k_t'(DATA_W);
    end else begin
      unique case (state_q)
        ST_LOAD: begin
          if (load_last) begin
            k_q     <= k_in;
            cnt_q   <= '0;
            state_q <= ST_COMPUTE;
          end
        end
        ST_COMPUTE: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == last_cnt) begin
            state_q <= ST_DRAIN;
          end
        end
        ST_DRAIN: begin
          if (out_can_load) begin
            state_q <= ST_LOAD;
          end
        end
        default: state_q <= ST_LOAD;
      endcase
    end
  end

  assign state = state_q;
  assign plane = cnt_q;
  assign k_cur = k_q;

endmodule
