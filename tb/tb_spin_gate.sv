// tb_spin_gate: drives a spin gate with 4 two-body and 2 three-body terms
// with random coefficients, spin inputs, noise bits, temperatures and
// clamps, and compares every cycle with a reference model of
//   I = c_i + sum c_ij m_j + sum c_ijk m_j m_k + w_rnd * (rnd ? 1 : -1)
// and of the saturated counter with 2*I0 states that turns I into s_i.
module tb_spin_gate;
  localparam int N2 = 4, N3 = 2, WR = 3;
  logic clk = 0, rst_n = 0, en = 0, init = 0;
  logic [2:0]        i0 = 3'd2;
  logic signed [7:0] c_i = '0;
  logic signed [7:0] c2 [N2];
  logic              s2 [N2];
  logic signed [7:0] c3 [N3];
  logic              s3j [N3], s3k [N3];
  logic              rnd = 0, clamp_en = 0, clamp_val = 0;
  logic signed [11:0] field;
  logic signed [2:0]  cnt;
  logic               s_i;
  int checks = 0, failures = 0;
  int model;

  spin_gate #(.N2(N2), .N3(N3), .CW(8), .W_RND(WR), .I0_MAX(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pm(logic b);
    return b ? 1 : -1;
  endfunction

  initial begin
    for (int j = 0; j < N2; j++) begin c2[j] = '0; s2[j] = 0; end
    for (int j = 0; j < N3; j++) begin c3[j] = '0; s3j[j] = 0; s3k[j] = 0; end
    model = -1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int f, nxt, lo, hi, r;
      @(negedge clk);
      if (t % 40 == 0) begin
        c_i = 8'(int'($urandom_range(0, 4)) - 2);
        for (int j = 0; j < N2; j++) c2[j] = 8'(int'($urandom_range(0, 6)) - 3);
        for (int j = 0; j < N3; j++) c3[j] = 8'(int'($urandom_range(0, 6)) - 3);
      end
      if (t % 25 == 0) i0 = ($urandom_range(0, 1) == 1) ? 3'd4 : 3'd2;
      for (int j = 0; j < N2; j++) s2[j] = 1'($urandom_range(0, 1));
      for (int j = 0; j < N3; j++) begin
        s3j[j] = 1'($urandom_range(0, 1));
        s3k[j] = 1'($urandom_range(0, 1));
      end
      rnd = 1'($urandom_range(0, 1));
      r = int'($urandom_range(0, 99));
      en        = (r < 90);
      init      = (r == 99);
      clamp_en  = (r >= 93 && r < 99);
      clamp_val = 1'($urandom_range(0, 1));
      #1;
      f = int'(c_i) + WR * pm(rnd);
      for (int j = 0; j < N2; j++) f += int'(c2[j]) * pm(s2[j]);
      for (int j = 0; j < N3; j++) f += int'(c3[j]) * pm(s3j[j]) * pm(s3k[j]);
      checks++;
      if (int'(field) != f) begin
        failures++;
        $display("FAIL t=%0d field=%0d exp=%0d", t, field, f);
      end
      checks++;
      if (s_i != (clamp_en ? clamp_val : (model >= 0))) begin
        failures++;
        $display("FAIL t=%0d s_i=%0d model=%0d clamp=%0d", t, s_i, model, clamp_en);
      end
      lo = -int'(i0);
      hi = int'(i0) - 1;
      if (init)          nxt = -1;
      else if (clamp_en) nxt = clamp_val ? hi : lo;
      else if (en) begin
        nxt = model + f;
        if (nxt < lo) nxt = lo;
        if (nxt > hi) nxt = hi;
      end else           nxt = model;
      @(posedge clk);
      model = nxt;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
