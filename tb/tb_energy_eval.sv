// tb_energy_eval: checks the Hamiltonian of the 4-bit invertible adder
// against gate truth tables. Every three-body gate has energy -2 when its
// output equals its logic function of the inputs and +2 otherwise, so the
// expected energy is the sum of those levels over all gates; this reference
// uses only the gate functions, not the coefficients. Tested on every
// consistent state (all A, B with internal nodes computed, E must be E_min)
// and on many random states, and each consistent state with one spin flipped
// (must leave E_min).
module tb_energy_eval;
  import cil_pkg::*;
  localparam int W  = 4;
  localparam int NS = n_spins(W);
  localparam int NG = n_gates(W);
  logic [NS-1:0]      s;
  logic signed [15:0] energy;
  logic               at_emin;
  int checks = 0, failures = 0;

  energy_eval #(.WIDTH(W)) dut (.s, .energy, .at_emin);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_energy(logic [NS-1:0] v);
    int e;
    gate_t g;
    logic f;
    e = 0;
    for (int k = 0; k < NG; k++) begin
      g = adder_gate(W, k);
      case (g.kind)
        G_AND:   f = v[g.a] & v[g.b];
        G_OR:    f = v[g.a] | v[g.b];
        default: f = v[g.a] ^ v[g.b];
      endcase
      e += (v[g.y] == f) ? -2 : 2;
    end
    return e;
  endfunction

  // Consistent state of the ripple-carry adder for operands a, b.
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
      p  = a[i] ^ b[i];
      gg = a[i] & b[i];
      q  = p & c;
      v[p_idx(W, i)] = p;
      v[g_idx(W, i)] = gg;
      v[q_idx(W, i)] = q;
      v[y_idx(W, i)] = p ^ c;
      c = gg | q;
    end
    v[y_idx(W, W)] = c;
    return v;
  endfunction

  task automatic check(logic [NS-1:0] v, int must_emin);
    int e;
    s = v;
    #1;
    e = ref_energy(v);
    checks++;
    if (int'(energy) != e || at_emin != (e == -2 * NG)) begin
      failures++;
      $display("FAIL s=%h energy=%0d exp=%0d at_emin=%0d", v, energy, e, at_emin);
    end
    if (must_emin >= 0) begin
      checks++;
      if (at_emin != must_emin[0]) begin
        failures++;
        $display("FAIL s=%h at_emin=%0d exp=%0d", v, at_emin, must_emin);
      end
    end
  endtask

  initial begin
    for (int a = 0; a < 16; a++)
      for (int b = 0; b < 16; b++) begin
        logic [NS-1:0] v;
        int y;
        v = consistent(a, b);
        y = 0;
        for (int i = 0; i <= W; i++) y |= int'(v[y_idx(W, i)]) << i;
        checks++;
        if (y != a + b) begin
          failures++;
          $display("FAIL reference adder %0d+%0d=%0d", a, b, y);
        end
        check(v, 1);
        check(v ^ (NS'(1) << $urandom_range(0, NS - 1)), 0);
      end
    for (int t = 0; t < 2000; t++) check(NS'({$urandom, $urandom}), -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
