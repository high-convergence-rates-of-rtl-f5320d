// tb_rng_xorshift: compares every lane of the generator with a reference
// xorshift32 sequence for 2000 steps (with en toggling), and checks that the
// output bits are roughly balanced (each bit stream should be a fair coin).
module tb_rng_xorshift;
  localparam int NB = 70;
  logic clk = 0, rst_n = 0, load = 0, en = 0;
  logic [31:0]   seed = 32'hDEADBEEF;
  logic [NB-1:0] bits;
  int checks = 0, failures = 0;
  logic [31:0] ref_st [3];
  int ones = 0, total = 0;

  rng_xorshift #(.NBITS(NB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] step(logic [31:0] x);
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  task automatic compare();
    logic [NB-1:0] exp;
    for (int b = 0; b < NB; b++) exp[b] = ref_st[b/32][b%32];
    checks++;
    if (bits !== exp) begin
      failures++;
      $display("FAIL bits=%h exp=%h", bits, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    load = 1;
    @(negedge clk);
    load = 0;
    for (int k = 0; k < 3; k++) ref_st[k] = seed ^ (32'(k) * 32'h9E3779B9);
    compare();
    for (int t = 0; t < 2000; t++) begin
      en = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (en) for (int k = 0; k < 3; k++) ref_st[k] = step(ref_st[k]);
      compare();
      ones  += $countones(bits);
      total += NB;
    end
    checks++;
    if (ones * 100 < total * 45 || ones * 100 > total * 55) begin
      failures++;
      $display("FAIL balance ones=%0d of %0d", ones, total);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
