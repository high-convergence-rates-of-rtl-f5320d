// tb_i0_ctrl: checks the annealing schedule cycle by cycle. With T = 7 it
// runs (1) a run that never converges with max_shots = 3, (2) a run whose
// conv input rises during the second shot, (3) max_shots = 0. For each it
// checks that i0 is I0min for T cycles and I0max for T cycles in every shot,
// that shot_end falls on the last I0max cycle, that the run lasts exactly
// shots * 2T cycles, and that done, converged and shots_used are right.
module tb_i0_ctrl;
  import cil_pkg::*;
  localparam int T = 7;
  logic clk = 0, rst_n = 0, start = 0, conv = 0;
  logic [7:0] max_shots = '0;
  logic [2:0] i0;
  phase_e     phase;
  logic       running, shot_end, done, converged;
  logic [7:0] shots_used;
  int checks = 0, failures = 0;

  i0_ctrl #(.T_CYCLES(T), .I0_MIN(2), .I0_MAX(4), .SHOT_W(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_bit(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d at %0t", what, got, exp, $time);
    end
  endtask

  // conv_at: shot (0-based) from whose end conv is held high, -1 for never.
  task automatic run(int shots, int conv_at, int exp_shots, logic exp_conv);
    @(negedge clk);
    max_shots = 8'(shots);
    start = 1;
    conv  = 0;
    @(negedge clk);
    start = 0;
    for (int sh = 0; sh < exp_shots; sh++) begin
      for (int c = 0; c < 2 * T; c++) begin
        conv = (conv_at >= 0 && sh >= conv_at);
        #1;
        expect_bit("running", running, 1'b1);
        checks++;
        if (int'(i0) != ((c < T) ? 2 : 4)) begin
          failures++;
          $display("FAIL i0=%0d at shot %0d cycle %0d", i0, sh, c);
        end
        expect_bit("shot_end", shot_end, c == 2 * T - 1);
        expect_bit("done early", done, 1'b0);
        @(negedge clk);
      end
    end
    expect_bit("done", done, 1'b1);
    expect_bit("stopped", running, 1'b0);
    expect_bit("converged", converged, exp_conv);
    checks++;
    if (int'(shots_used) != exp_shots) begin
      failures++;
      $display("FAIL shots_used=%0d exp=%0d", shots_used, exp_shots);
    end
    @(negedge clk);
    expect_bit("done pulse", done, 1'b0);
    expect_bit("idle i0", i0 == 3'd2, 1'b1);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(3, -1, 3, 1'b0);
    run(5, 1, 2, 1'b1);
    run(0, -1, 1, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
