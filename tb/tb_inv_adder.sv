// tb_inv_adder: the 4-bit invertible adder network on its own, with the
// testbench driving the temperature schedule and the noise bits.
//  1. Stability: in a noiseless copy (W_RND = 0) every consistent state
//     (A + B = Y, internal nodes right) is loaded through the clamps and
//     released; it must stay unchanged for 2T cycles at I0max, because each
//     spin's local field points along it in a minimum-energy state.
//  2. Backward mode: Y is clamped to every value 0..30 (two trials each);
//     shots of T cycles at I0 = 2 and T cycles at I0 = 4 (T = 100, w_rnd = 3)
//     are applied until the free spins form a consistent state, at most 16
//     shots. The clamped spins must never move, every reported solution must
//     satisfy A + B = Y, and at least 90 % of trials must converge (the
//     paper reports almost all cases converging within 4 shots).
//  3. Forward mode: A and B clamped, Y must come out as A + B.
module tb_inv_adder;
  import cil_pkg::*;
  localparam int W  = 4;
  localparam int NS = n_spins(W);
  localparam int NG = n_gates(W);
  localparam int T  = 100;

  logic clk = 0, rst_n = 0, en = 0, init = 0;
  logic [2:0]    i0 = 3'd4;
  logic [NS-1:0] rnd = '0, clamp_en = '0, clamp_val = '0;
  logic [NS-1:0] spins, spins0;
  int checks = 0, failures = 0;

  inv_adder #(.WIDTH(W), .W_RND(3)) dut (
    .clk, .rst_n, .en, .init, .i0, .rnd, .clamp_en, .clamp_val, .spins);
  inv_adder #(.WIDTH(W), .W_RND(0)) dut0 (
    .clk, .rst_n, .en, .init, .i0, .rnd, .clamp_en, .clamp_val, .spins(spins0));

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic valid(logic [NS-1:0] v);
    gate_t g;
    logic f;
    for (int k = 0; k < NG; k++) begin
      g = adder_gate(W, k);
      case (g.kind)
        G_AND:   f = v[g.a] & v[g.b];
        G_OR:    f = v[g.a] | v[g.b];
        default: f = v[g.a] ^ v[g.b];
      endcase
      if (v[g.y] != f) return 1'b0;
    end
    return 1'b1;
  endfunction

  function automatic logic [NS-1:0] consistent(int a, int b);
    logic [NS-1:0] v;
    logic c, p, gg, q;
    v = '0;
    for (int i = 0; i < W; i++) begin
      v[a_idx(W, i)] = a[i];
      v[b_idx(W, i)] = b[i];
    end
    v[y_idx(W, 0)] = a[0] ^ b[0];
    c = a[0] & b[0];
    for (int i = 1; i < W; i++) begin
      v[c_idx(W, i)] = c;
      p = a[i] ^ b[i]; gg = a[i] & b[i]; q = p & c;
      v[p_idx(W, i)] = p; v[g_idx(W, i)] = gg; v[q_idx(W, i)] = q;
      v[y_idx(W, i)] = p ^ c;
      c = gg | q;
    end
    v[y_idx(W, W)] = c;
    return v;
  endfunction

  function automatic int field_of(logic [NS-1:0] v, int base, int n);
    int r = 0;
    for (int i = 0; i < n; i++) r |= int'(v[base + i]) << i;
    return r;
  endfunction

  // Runs up to max_shots shots; returns the number used, 0 if none converged.
  task automatic anneal(int max_shots, logic [NS-1:0] fixed_mask,
                        logic [NS-1:0] fixed_val, output int used);
    used = 0;
    for (int sh = 1; sh <= max_shots && used == 0; sh++) begin
      for (int c = 0; c < 2 * T; c++) begin
        i0  = (c < T) ? 3'd2 : 3'd4;
        rnd = NS'({$urandom, $urandom});
        @(posedge clk);
        #1;
        if (((spins ^ fixed_val) & fixed_mask) != '0) begin
          failures++;
          $display("FAIL clamped spin moved");
        end
      end
      if (valid(spins)) used = sh;
    end
  endtask

  initial begin
    int conv_cnt, trials, used;
    logic [NS-1:0] ymask, abmask, v;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // 1. stability
    for (int a = 0; a < 16; a += 3)
      for (int b = 0; b < 16; b += 5) begin
        v = consistent(a, b);
        @(negedge clk);
        clamp_en = '1; clamp_val = v; en = 1; i0 = 3'd4;
        @(negedge clk);
        clamp_en = '0;
        repeat (2 * T) begin
          rnd = NS'({$urandom, $urandom});
          @(negedge clk);
        end
        checks++;
        if (spins0 != v) begin
          failures++;
          $display("FAIL stability a=%0d b=%0d", a, b);
        end
      end

    // 2. backward
    ymask = '0;
    for (int i = 0; i <= W; i++) ymask[y_idx(W, i)] = 1'b1;
    conv_cnt = 0; trials = 0;
    for (int y = 0; y <= 30; y++)
      for (int tr = 0; tr < 2; tr++) begin
        @(negedge clk);
        clamp_en = ymask;
        clamp_val = '0;
        for (int i = 0; i <= W; i++) clamp_val[y_idx(W, i)] = y[i];
        init = 1; en = 0;
        @(negedge clk);
        init = 0; en = 1;
        anneal(16, ymask, clamp_val, used);
        trials++;
        if (used > 0) begin
          conv_cnt++;
          checks++;
          if (field_of(spins, 0, W) + field_of(spins, W, W) != y) begin
            failures++;
            $display("FAIL backward y=%0d a=%0d b=%0d", y,
                     field_of(spins, 0, W), field_of(spins, W, W));
          end
        end
      end
    $display("backward: %0d of %0d trials converged within 16 shots", conv_cnt, trials);
    checks++;
    if (conv_cnt * 10 < trials * 9) begin
      failures++;
      $display("FAIL backward convergence rate too low");
    end

    // 3. forward
    abmask = '0;
    for (int i = 0; i < 2 * W; i++) abmask[i] = 1'b1;
    for (int t = 0; t < 10; t++) begin
      int a, b;
      a = int'($urandom_range(0, 15));
      b = int'($urandom_range(0, 15));
      @(negedge clk);
      clamp_en = abmask;
      clamp_val = '0;
      for (int i = 0; i < W; i++) begin
        clamp_val[a_idx(W, i)] = a[i];
        clamp_val[b_idx(W, i)] = b[i];
      end
      init = 1; en = 0;
      @(negedge clk);
      init = 0; en = 1;
      anneal(16, abmask, clamp_val, used);
      checks++;
      if (used == 0 || field_of(spins, y_idx(W, 0), W + 1) != a + b) begin
        failures++;
        $display("FAIL forward %0d+%0d -> %0d (shots %0d)", a, b,
                 field_of(spins, y_idx(W, 0), W + 1), used);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
