// tb_gate_hamiltonians: checks the three-body gate Hamiltonians of cil_pkg
// against the energy table they must reproduce. For AND, OR, XOR and XNOR it
// evaluates H over all eight (A,B,Y) states and checks: every state where Y is
// the gate function of A and B has E_min = -2; every other state has a higher
// energy; the gap to the second level (dE_min) is 4; the gap to the highest
// level (dE_max) is 4; there are exactly two energy levels. For AND it also
// checks the printed coefficients (0,0,-1,0,1,1,1).
module tb_gate_hamiltonians;
  import cil_pkg::*;
  int checks = 0, failures = 0;

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    gate_e kinds [4] = '{G_AND, G_OR, G_XOR, G_XNOR};
    gate_coef_t c;
    c = gate_coef(G_AND);
    expect_eq("AND c_A", int'(c.c_a), 0);
    expect_eq("AND c_B", int'(c.c_b), 0);
    expect_eq("AND c_Y", int'(c.c_y), -1);
    expect_eq("AND c_AB", int'(c.c_ab), 0);
    expect_eq("AND c_AY", int'(c.c_ay), 1);
    expect_eq("AND c_BY", int'(c.c_by), 1);
    expect_eq("AND c_ABY", int'(c.c_aby), 1);
    foreach (kinds[g]) begin
      int e [8];
      int emin, emax, second, levels;
      logic valid [8];
      c = gate_coef(kinds[g]);
      for (int st = 0; st < 8; st++) begin
        int ma, mb, my;
        logic a, b, y, f;
        a = st[2]; b = st[1]; y = st[0];
        ma = a ? 1 : -1; mb = b ? 1 : -1; my = y ? 1 : -1;
        case (kinds[g])
          G_AND:   f = a & b;
          G_OR:    f = a | b;
          G_XOR:   f = a ^ b;
          default: f = ~(a ^ b);
        endcase
        valid[st] = (y == f);
        e[st] = -(int'(c.c_a) * ma + int'(c.c_b) * mb + int'(c.c_y) * my
                + int'(c.c_ab) * ma * mb + int'(c.c_ay) * ma * my
                + int'(c.c_by) * mb * my + int'(c.c_aby) * ma * mb * my);
      end
      emin = e[0]; emax = e[0];
      for (int st = 1; st < 8; st++) begin
        if (e[st] < emin) emin = e[st];
        if (e[st] > emax) emax = e[st];
      end
      second = emax;
      levels = 0;
      for (int v = emin; v <= emax; v++) begin
        bit seen;
        seen = 0;
        for (int st = 0; st < 8; st++) if (e[st] == v) seen = 1;
        if (seen) levels++;
        if (seen && v > emin && v < second) second = v;
      end
      expect_eq({kinds[g].name(), " E_min"}, emin, -2);
      expect_eq({kinds[g].name(), " dE_min"}, second - emin, 4);
      expect_eq({kinds[g].name(), " dE_max"}, emax - emin, 4);
      expect_eq({kinds[g].name(), " N_EL"}, levels, 2);
      for (int st = 0; st < 8; st++)
        expect_eq($sformatf("%s state %0d at E_min iff valid", kinds[g].name(), st),
                  int'(e[st] == emin), int'(valid[st]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
