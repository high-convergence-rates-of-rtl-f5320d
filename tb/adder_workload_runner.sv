// adder_workload_runner: testbench helper that runs one WIDTH-bit invertible
// adder (cil_adder_top, paper schedule: T = 100, I0 2/4, w_rnd = 3) in
// backward mode over NY target values of Y, TRIALS seeds each, with up to
// MAXS shots, and reports the mean non-convergence rate after 1, 2, 4, ...
// shots (the fraction of runs not yet at E_min). Every converged answer
// must satisfy A + B = Y. The Y values are spread evenly over 0 .. 2^(W+1)-2.
// checks/failures are valid when fin rises.
module adder_workload_runner #(
  parameter int WIDTH  = 6,
  parameter int MAXS   = 32,
  parameter int NY     = 16,
  parameter int TRIALS = 2
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic fin,
  output int   nonconv_at_max   // runs not converged after MAXS shots
);
  import cil_pkg::*;
  logic             start = 0;
  logic [WIDTH-1:0] a_in = '0, b_in = '0;
  logic [WIDTH:0]   y_in = '0;
  logic [31:0]      seed = '0;
  logic             busy, done, converged, at_emin;
  logic [7:0]       shots_used;
  logic [WIDTH-1:0] a_out, b_out;
  logic [WIDTH:0]   y_out;
  logic signed [15:0] energy;
  logic [2:0]       i0;
  phase_e           phase;

  cil_adder_top #(.WIDTH(WIDTH)) dut (
    .clk, .rst_n, .start, .mode(MODE_BACKWARD), .a_in, .b_in, .y_in,
    .max_shots(8'(MAXS)), .seed, .busy, .done, .converged, .shots_used,
    .a_out, .b_out, .y_out, .energy, .at_emin, .i0, .phase);

  int used [$];

  initial begin
    int ymax, runs;
    checks = 0; failures = 0; fin = 0; nonconv_at_max = 0;
    ymax = (1 << (WIDTH + 1)) - 2;
    wait (rst_n);
    for (int k = 0; k < NY; k++)
      for (int tr = 0; tr < TRIALS; tr++) begin
        int y;
        y = (k * ymax) / (NY - 1);
        @(negedge clk);
        y_in = (WIDTH+1)'(y);
        seed = $urandom;
        start = 1;
        @(negedge clk);
        start = 0;
        while (!done) @(negedge clk);
        if (converged) begin
          used.push_back(int'(shots_used));
          checks++;
          if (int'(a_out) + int'(b_out) != y) begin
            failures++;
            $display("FAIL %0d-bit y=%0d gave a=%0d b=%0d", WIDTH, y, a_out, b_out);
          end
        end else begin
          used.push_back(MAXS + 1);
          nonconv_at_max++;
        end
      end
    runs = NY * TRIALS;
    $display("%0d-bit adder, backward, %0d runs: mean non-convergence rate", WIDTH, runs);
    for (int n = 1; n <= MAXS; n *= 2) begin
      int nc;
      nc = 0;
      foreach (used[i]) if (used[i] > n) nc++;
      $display("  N_shot=%4d  %0d/%0d", n, nc, runs);
    end
    fin = 1;
  end
endmodule
