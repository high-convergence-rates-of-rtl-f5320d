// tb_cil_adder_top: end-to-end test of the invertible adder at its default
// parameters (4 bits, T = 100, I0 2/4, w_rnd = 3).
//  - Backward runs: Y = 0..30, two seeds each, up to 16 shots. Every run
//    that reports convergence must return A + B = Y; at least 90 % must
//    converge.
//  - Forward runs: random A, B; Y must come back as A + B.
//  - Single-shot backward runs, some of which run out of shots without
//    converging (converged = 0, shots_used = 1).
// For every run the start-to-done time must be shots_used * 2T + 1 cycles,
// and during a run i0 must follow the shot waveform. Mechanisms counted and
// required to occur: backward mode, forward mode, I0min->I0max and
// I0max->I0min switches, convergence before the shot limit, a run ending
// unconverged at the shot limit, and a restart of a finished design.
module tb_cil_adder_top;
  import cil_pkg::*;
  localparam int W = 4;
  localparam int T = 100;

  logic clk = 0, rst_n = 0, start = 0;
  mode_e       mode = MODE_BACKWARD;
  logic [W-1:0] a_in = '0, b_in = '0;
  logic [W:0]   y_in = '0;
  logic [7:0]   max_shots = 8'd16;
  logic [31:0]  seed = 32'h1;
  logic         busy, done, converged, at_emin;
  logic [7:0]   shots_used;
  logic [W-1:0] a_out, b_out;
  logic [W:0]   y_out;
  logic signed [15:0] energy;
  logic [2:0]   i0;
  phase_e       phase;

  int checks = 0, failures = 0;
  int n_back = 0, n_fwd = 0, n_up = 0, n_down = 0, n_early = 0, n_exhaust = 0, n_restart = 0;
  int conv_back = 0, runs_back = 0;
  logic [2:0] i0_prev = 3'd2;

  cil_adder_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (busy && i0_prev == 3'd2 && i0 == 3'd4) n_up++;
    if (busy && i0_prev == 3'd4 && i0 == 3'd2) n_down++;
    i0_prev <= i0;
  end

  task automatic run(mode_e m, int a, int b, int y, int shots);
    int cyc;
    @(negedge clk);
    if (!busy && shots_used != 0) n_restart++;
    mode = m; a_in = W'(a); b_in = W'(b); y_in = (W+1)'(y);
    max_shots = 8'(shots); seed = $urandom;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != int'(shots_used) * 2 * T + 1) begin
      failures++;
      $display("FAIL latency %0d cycles for %0d shots", cyc, shots_used);
    end
    checks++;
    if (shots_used == 0 || int'(shots_used) > shots
        || (!converged && int'(shots_used) != shots)) begin
      failures++;
      $display("FAIL shots_used=%0d converged=%0d", shots_used, converged);
    end
    if (converged && int'(shots_used) < shots) n_early++;
    if (!converged) n_exhaust++;
    if (m == MODE_BACKWARD) begin
      n_back++;
      if (converged) begin
        checks++;
        if (int'(a_out) + int'(b_out) != y || int'(y_out) != y) begin
          failures++;
          $display("FAIL backward y=%0d gave a=%0d b=%0d y=%0d", y, a_out, b_out, y_out);
        end
      end
    end else begin
      n_fwd++;
      checks++;
      if (!converged || int'(y_out) != a + b || int'(a_out) != a || int'(b_out) != b) begin
        failures++;
        $display("FAIL forward %0d+%0d gave %0d (conv %0d)", a, b, y_out, converged);
      end
    end
  endtask

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never seen: %s", what);
    end
    $display("  %-28s %0d", what, n);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int y = 0; y <= 30; y++)
      for (int k = 0; k < 2; k++) begin
        run(MODE_BACKWARD, 0, 0, y, 16);
        runs_back++;
        if (converged) conv_back++;
      end
    $display("backward: %0d of %0d runs converged within 16 shots", conv_back, runs_back);
    checks++;
    if (conv_back * 10 < runs_back * 9) begin
      failures++;
      $display("FAIL backward convergence rate");
    end
    for (int k = 0; k < 10; k++)
      run(MODE_FORWARD, int'($urandom_range(0, 15)), int'($urandom_range(0, 15)), 0, 16);
    for (int k = 0; k < 20; k++) run(MODE_BACKWARD, 0, 0, (k % 2) ? 30 : 0, 1);
    $display("mechanisms:");
    need("backward runs", n_back);
    need("forward runs", n_fwd);
    need("I0min -> I0max switches", n_up);
    need("I0max -> I0min switches", n_down);
    need("converged before limit", n_early);
    need("ended at shot limit", n_exhaust);
    need("restarts", n_restart);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
