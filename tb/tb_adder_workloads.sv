// tb_adder_workloads: the 4-, 6- and 8-bit invertible adders of the paper's
// evaluation, run in backward mode (Y fixed) with the paper's schedule, side
// by side. The 4-bit adder is run for every Y from 0 to 30, the others for 32
// Y values spread over their range. Prints the mean non-convergence rate
// against the number of shots for each and fails if any answer is wrong or if
// more than 25 % of the runs are still unconverged at the largest shot count
// (16 shots for 4 bits, 32 for 6 bits, 128 for 8 bits; the paper reports
// almost all 4-bit cases converged by 4 shots and mean rates of about 1e-3
// and 1e-4 for 6 and 8 bits at the largest counts).
module tb_adder_workloads;
  logic clk = 0, rst_n = 0;
  int c4, f4, n4, c6, f6, n6, c8, f8, n8;
  logic fin4, fin6, fin8;
  int checks, failures;

  localparam int NY = 32, TR = 4;

  adder_workload_runner #(.WIDTH(4), .MAXS(16),  .NY(31), .TRIALS(TR)) r4 (
    .clk, .rst_n, .checks(c4), .failures(f4), .fin(fin4), .nonconv_at_max(n4));
  adder_workload_runner #(.WIDTH(6), .MAXS(32),  .NY(NY), .TRIALS(TR)) r6 (
    .clk, .rst_n, .checks(c6), .failures(f6), .fin(fin6), .nonconv_at_max(n6));
  adder_workload_runner #(.WIDTH(8), .MAXS(128), .NY(NY), .TRIALS(TR)) r8 (
    .clk, .rst_n, .checks(c8), .failures(f8), .fin(fin8), .nonconv_at_max(n8));

  always #5 clk = ~clk;

  initial begin
    repeat (20000000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c6 + c8, f4 + f6 + f8 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fin4 && fin6 && fin8);
    checks   = c4 + c6 + c8 + 3;
    failures = f4 + f6 + f8;
    if (n4 * 4 > 31 * TR) begin
      failures++;
      $display("FAIL 4-bit: %0d runs unconverged after 16 shots", n4);
    end
    if (n6 * 4 > NY * TR) begin
      failures++;
      $display("FAIL 6-bit: %0d runs unconverged after 32 shots", n6);
    end
    if (n8 * 4 > NY * TR) begin
      failures++;
      $display("FAIL 8-bit: %0d runs unconverged after 128 shots", n8);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
