// tb_inv_and_backward: a single three-body invertible AND gate (three spin
// gates with the AND coefficients 0,0,-1,0,1,1,1) run backward with its
// output Y clamped to 0, at I0 = 4 and w_rnd = 3. The state (A,B) is sampled
// every 8 cycles for 40000 cycles. The three valid states 00, 01, 10 must each
// appear with a share between 20 % and 47 % (ideally a third each), and the
// invalid state 11 must appear less often than any valid one.
module tb_inv_and_backward;
  import cil_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic [2:0] i0 = 3'd4;
  logic [2:0] rnd;
  logic sa, sb, sy;
  int checks = 0, failures = 0;
  int hist [4];

  localparam gate_coef_t C = gate_coef(G_AND);

  // A: partners B (c_AB), Y (c_AY); three-body with B, Y.
  spin_gate #(.N2(2), .N3(1)) u_a (
    .clk, .rst_n, .en, .init(1'b0), .i0, .c_i(8'(C.c_a)),
    .c2('{8'(C.c_ab), 8'(C.c_ay)}), .s2('{sb, sy}),
    .c3('{8'(C.c_aby)}), .s3j('{sb}), .s3k('{sy}),
    .rnd(rnd[0]), .clamp_en(1'b0), .clamp_val(1'b0), .field(), .cnt(), .s_i(sa));
  spin_gate #(.N2(2), .N3(1)) u_b (
    .clk, .rst_n, .en, .init(1'b0), .i0, .c_i(8'(C.c_b)),
    .c2('{8'(C.c_ab), 8'(C.c_by)}), .s2('{sa, sy}),
    .c3('{8'(C.c_aby)}), .s3j('{sa}), .s3k('{sy}),
    .rnd(rnd[1]), .clamp_en(1'b0), .clamp_val(1'b0), .field(), .cnt(), .s_i(sb));
  spin_gate #(.N2(2), .N3(1)) u_y (
    .clk, .rst_n, .en, .init(1'b0), .i0, .c_i(8'(C.c_y)),
    .c2('{8'(C.c_ay), 8'(C.c_by)}), .s2('{sa, sb}),
    .c3('{8'(C.c_aby)}), .s3j('{sa}), .s3k('{sb}),
    .rnd(rnd[2]), .clamp_en(1'b1), .clamp_val(1'b0), .field(), .cnt(), .s_i(sy));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total;
    foreach (hist[i]) hist[i] = 0;
    rnd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    en = 1;
    for (int t = 0; t < 40000; t++) begin
      @(negedge clk);
      rnd = 3'($urandom);
      if (t % 8 == 7) begin
        hist[{sa, sb}]++;
        checks++;
        if (sy != 1'b0) begin
          failures++;
          $display("FAIL clamped Y moved");
        end
      end
    end
    total = hist[0] + hist[1] + hist[2] + hist[3];
    $display("AB=00 %0d  01 %0d  10 %0d  11 %0d  of %0d", hist[0], hist[1], hist[2], hist[3], total);
    for (int s = 0; s < 3; s++) begin
      checks++;
      if (hist[s] * 100 < total * 20 || hist[s] * 100 > total * 47 || hist[3] >= hist[s]) begin
        failures++;
        $display("FAIL share of state %0d", s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
