// tb_pixel_dispatcher: self-checking test of the round-robin pixel dispatcher.
//
// Four model cores with randomly busy ready lines take samples. The testbench
// checks that each pixel of N = 8 samples goes entirely to one core, that the
// cores are visited strictly in the order 0,1,2,3,0,..., that the input waits
// (in_stall) instead of skipping a busy core, that the samples arrive
// unchanged, and that frame_start marks the first sample of every frame of
// FRAME_SUMS = 5 pixels.
module tb_pixel_dispatcher;
  localparam int N = 8;
  localparam int W = 16;
  localparam int C = 4;
  localparam int F = 5;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic s_valid, s_ready, frame_start, in_stall;
  logic [W-1:0] s_data, c_data;
  logic [C-1:0] c_valid, c_ready;
  logic [1:0]   target;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  pixel_dispatcher #(.N(N), .DATA_W(W), .NUM_CORES(C), .FRAME_SUMS(F)) dut (
    .clk(clk), .rst_n(rst_n), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
    .c_valid(c_valid), .c_ready(c_ready), .c_data(c_data), .target(target),
    .frame_start(frame_start), .in_stall(in_stall));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
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
    int exp_core = 0, exp_cnt = 0, exp_pix = 0, stalls = 0, frames = 0;
    s_valid = 1'b0; s_data = '0; c_ready = '1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6000; t++) begin
      bit hold;
      hold = s_valid && !s_ready;
      c_ready = C'($urandom);
      if (!hold) begin
        s_valid = ($urandom_range(3, 0) != 0);
        s_data  = W'($urandom);
      end
      #1;
      check(int'(target) == exp_core, "target out of round-robin order");
      check(c_valid == (s_valid ? C'(1) << exp_core : '0), "sample steered to the wrong core");
      check(s_ready == c_ready[exp_core], "s_ready does not follow the target core");
      check(c_data == s_data, "sample changed");
      check(in_stall == (s_valid && !c_ready[exp_core]), "in_stall wrong");
      if (in_stall) stalls++;
      if (s_valid && s_ready) begin
        check(frame_start == (exp_cnt == 0 && exp_pix == 0), "frame_start wrong");
        if (frame_start) frames++;
        exp_cnt++;
        if (exp_cnt == N) begin
          exp_cnt = 0;
          exp_core = (exp_core + 1) % C;
          exp_pix = (exp_pix + 1) % F;
        end
      end else begin
        check(!frame_start, "frame_start without a sample");
      end
      @(negedge clk);
    end
    check(stalls > 0 && frames > 3, "stall or frame boundary never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
