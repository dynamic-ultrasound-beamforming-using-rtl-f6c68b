// tb_fsm_control: self-checking test of the core's phase controller.
//
// For every precision k = 1..16 (64-channel defaults, 6 tree levels) the
// testbench pulses load_last and checks: the accumulator is cleared in that
// cycle; k is captured then (changing k_in later has no effect); COMPUTE lasts
// exactly k + 18 cycles with plane = 0, 1, ... and the encoder and
// accumulator enabled; DRAIN then stalls while out_can_load is low and loads
// the output register in the first cycle it is high; the FSM is back in LOAD.
module tb_fsm_control;
  import lra_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic load_last, out_can_load;
  k_t   k_in, k_cur;
  core_state_e state;
  logic load_en, acc_clear, acc_en, enc_active, out_load, stall;
  logic [5:0] plane;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  fsm_control #(.N(64), .DATA_W(16)) dut (
    .clk(clk), .rst_n(rst_n), .load_last(load_last), .k_in(k_in), .out_can_load(out_can_load),
    .state(state), .load_en(load_en), .acc_clear(acc_clear), .acc_en(acc_en),
    .enc_active(enc_active), .plane(plane), .k_cur(k_cur), .out_load(out_load), .stall(stall));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int n_compute, n_stall, want_stall;
    load_last = 1'b0; out_can_load = 1'b1; k_in = 5'd16;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 3; rep++) begin
      for (int kk = 1; kk <= 16; kk++) begin
        @(negedge clk);
        check(state == ST_LOAD && load_en, "not in LOAD");
        check(!acc_en && !enc_active && !out_load, "datapath enabled in LOAD");
        k_in = k_t'(kk);
        load_last = 1'b1;
        #1;
        check(acc_clear, "no accumulator clear with the last sample");
        @(negedge clk);
        load_last = 1'b0;
        k_in = k_t'($urandom_range(16, 1));   // must not matter any more
        n_compute = 0;
        while (state == ST_COMPUTE && n_compute < 100) begin
          check(plane == 6'(n_compute), $sformatf("plane %0d in compute cycle %0d", plane, n_compute));
          check(acc_en && enc_active && !load_en, "compute strobes wrong");
          check(k_cur == k_t'(kk), "k not held during compute");
          n_compute++;
          @(negedge clk);
        end
        check(n_compute == kk + 18, $sformatf("k=%0d: compute took %0d cycles, expected %0d", kk, n_compute, kk + 18));
        check(state == ST_DRAIN, "no DRAIN after COMPUTE");
        want_stall = (rep == 0) ? 0 : $urandom_range(4, 1);
        n_stall = 0;
        out_can_load = (want_stall == 0);
        #1;
        while (state == ST_DRAIN && n_stall < 50) begin
          if (n_stall == want_stall) out_can_load = 1'b1;
          #1;
          check(out_load == out_can_load, "out_load differs from out_can_load in DRAIN");
          check(stall == !out_can_load, "stall flag wrong");
          @(negedge clk);
          if (state == ST_DRAIN) n_stall++;
        end
        check(n_stall == want_stall, $sformatf("stalled %0d cycles, expected %0d", n_stall, want_stall));
        check(state == ST_LOAD, "not back in LOAD");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
