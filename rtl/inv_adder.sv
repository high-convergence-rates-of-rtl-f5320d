// inv_adder: N-bit invertible ripple-carry adder (Y = A + B) made of
// three-body spin gates.
//
// The adder is the gate-level ripple-carry adder (half adder for bit 0, full
// adders P=A^B, G=A&B, S=P^C, Q=P&C, Cout=G|Q above it) with every net turned
// into a spin and every gate replaced by its three-body Hamiltonian from
// cil_pkg. The network Hamiltonian is the sum of the gate Hamiltonians, so
// the local field of a spin is the sum, over the gates it belongs to (at most
// MAXG = 3), of that gate's one-body coefficient, its two two-body terms with
// the gate's other two spins and its one three-body term with them. Each
// spin is one spin_gate with 2*MAXG two-body and MAXG three-body inputs; the
// inputs of gates a spin does not belong to get zero coefficients. The whole
// wiring is worked out at elaboration from the netlist functions of cil_pkg.
//
// Interface: en advances every spin one step; init puts every counter in its
// neutral state; i0 is the current pseudo inverse temperature; rnd gives one
// random bit per spin per cycle; clamp_en/clamp_val fix chosen spins (the
// outputs Y in backward mode, the inputs A and B in forward mode). spins is
// the state of every spin, numbered as in cil_pkg (A, then B, then Y[0..N],
// then the internal nodes). All spins update together from the state of the
// previous cycle.
module inv_adder
  import cil_pkg::*;
#(
  parameter int WIDTH  = 4,
  parameter int W_RND  = W_RND_DEF,
  parameter int I0_MAX = I0_MAX_DEF,
  parameter int I0_W   = $clog2(I0_MAX + 1),
  parameter int NS     = n_spins(WIDTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic            init,
  input  logic [I0_W-1:0] i0,
  input  logic [NS-1:0]   rnd,
  input  logic [NS-1:0]   clamp_en,
  input  logic [NS-1:0]   clamp_val,
  output logic [NS-1:0]   spins
);
  // The other two spins of gate membership k of spin s (w = 0 or 1).
  function automatic int partner(int n, int s, int k, int w);
    int    gi;
    gate_t g;
    gi = member_gate(n, s, k);
    if (gi < 0) return 0;
    g = adder_gate(n, gi);
    if (int'(g.a) == s) return (w == 0) ? int'(g.b) : int'(g.y);
    if (int'(g.b) == s) return (w == 0) ? int'(g.a) : int'(g.y);
    return (w == 0) ? int'(g.a) : int'(g.b);
  endfunction

  // Coefficient of membership k of spin s: w = 0, 1 two-body with
  // partner(w); w = 2 three-body; w = 3 one-body.
  function automatic int coef(int n, int s, int k, int w);
    int         gi;
    gate_t      g;
    gate_coef_t c;
    gi = member_gate(n, s, k);
    if (gi < 0) return 0;
    g = adder_gate(n, gi);
    c = gate_coef(g.kind);
    if (w == 2) return int'(c.c_aby);
    if (int'(g.a) == s) return (w == 0) ? int'(c.c_ab) : (w == 1) ? int'(c.c_ay) : int'(c.c_a);
    if (int'(g.b) == s) return (w == 0) ? int'(c.c_ab) : (w == 1) ? int'(c.c_by) : int'(c.c_b);
    return (w == 0) ? int'(c.c_ay) : (w == 1) ? int'(c.c_by) : int'(c.c_y);
  endfunction

  function automatic int one_body(int n, int s);
    int sum;
    sum = 0;
    for (int k = 0; k < MAXG; k++) sum += coef(n, s, k, 3);
    return sum;
  endfunction

  logic [NS-1:0] state;

  for (genvar s = 0; s < NS; s++) begin : g_spin
    logic signed [CW-1:0] c2  [2*MAXG];
    logic                 s2  [2*MAXG];
    logic signed [CW-1:0] c3  [MAXG];
    logic                 s3j [MAXG];
    logic                 s3k [MAXG];

    for (genvar k = 0; k < MAXG; k++) begin : g_mem
      localparam int P0 = partner(WIDTH, s, k, 0);
      localparam int P1 = partner(WIDTH, s, k, 1);
      assign c2[2*k]   = CW'(coef(WIDTH, s, k, 0));
      assign c2[2*k+1] = CW'(coef(WIDTH, s, k, 1));
      assign c3[k]     = CW'(coef(WIDTH, s, k, 2));
      assign s2[2*k]   = state[P0];
      assign s2[2*k+1] = state[P1];
      assign s3j[k]    = state[P0];
      assign s3k[k]    = state[P1];
    end

    spin_gate #(
      .N2(2*MAXG), .N3(MAXG), .CW(CW), .W_RND(W_RND), .I0_MAX(I0_MAX), .I0_W(I0_W)
    ) u_spin (
      .clk, .rst_n, .en, .init, .i0,
      .c_i      (CW'(one_body(WIDTH, s))),
      .c2, .s2, .c3, .s3j, .s3k,
      .rnd      (rnd[s]),
      .clamp_en (clamp_en[s]),
      .clamp_val(clamp_val[s]),
      .field    (),
      .cnt      (),
      .s_i      (state[s])
    );
  end

  assign spins = state;
endmodule
