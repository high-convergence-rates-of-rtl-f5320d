// cil_pkg: types, constants and elaboration-time netlist functions shared by
// the three-body CMOS invertible-logic (CIL) adder.
//
// A spin m in {-1,+1} is carried as a bit s = (1+m)/2. Integer-valued
// stochastic quantities (coefficients and the sum that drives the Stanh
// counter) are signed two's-complement fields.
//
// What follows the paper: the three-body AND Hamiltonian coefficients
// (c_A,c_B,c_Y,c_AB,c_AY,c_BY,c_ABY) = (0,0,-1,0,1,1,1); the annealing numbers
// I0min = 2, I0max = 4, T = 100 and w_rnd = 3; an adder that is a ripple-carry
// adder built from invertible gates.
// Own choices: the OR coefficients are the AND ones with all spins inverted
// (one- and three-body terms change sign); the XOR Hamiltonian is the single
// three-body term c_ABY = -2 and the XNOR one c_ABY = +2. All of them
// reproduce the paper's energy table for three-body gates (E_min = -2, every
// invalid state at +2; XNOR is listed there but the adder does not use it).
// Bit 0 of the adder
// is a half adder (XOR + AND); bits 1..N-1 are full adders of five gates
// (P=A^B, G=A&B, S=P^C, Q=P&C, Cout=G|Q); the carry out of the top bit is the
// extra sum bit Y[N].
package cil_pkg;

  // Width of a signed coefficient / local-field field.
  localparam int CW = 8;
  typedef logic signed [CW-1:0] coef_t;

  // Annealing defaults.
  localparam int I0_MIN_DEF  = 2;
  localparam int I0_MAX_DEF  = 4;
  localparam int T_DEF       = 100;
  localparam int W_RND_DEF   = 3;
  // Energy of every valid state of one three-body gate.
  localparam int GATE_EMIN   = -2;
  // Largest number of gates a single adder spin belongs to.
  localparam int MAXG        = 3;

  typedef enum logic [1:0] {G_AND = 2'd0, G_OR = 2'd1, G_XOR = 2'd2, G_XNOR = 2'd3} gate_e;

  typedef enum logic {MODE_FORWARD = 1'b0, MODE_BACKWARD = 1'b1} mode_e;

  typedef enum logic {PH_LOW = 1'b0, PH_HIGH = 1'b1} phase_e;

  // Hamiltonian coefficients of one three-input/one-output gate (A,B -> Y).
  typedef struct packed {
    logic signed [3:0] c_a;
    logic signed [3:0] c_b;
    logic signed [3:0] c_y;
    logic signed [3:0] c_ab;
    logic signed [3:0] c_ay;
    logic signed [3:0] c_by;
    logic signed [3:0] c_aby;
  } gate_coef_t;

  // One gate of the network: its kind and the indices of its three spins.
  typedef struct packed {
    gate_e    kind;
    logic [15:0] a;
    logic [15:0] b;
    logic [15:0] y;
  } gate_t;

  function automatic gate_coef_t gate_coef(gate_e kind);
    gate_coef_t c;
    case (kind)
      G_AND:   c = '{c_a: 4'sd0, c_b: 4'sd0, c_y: -4'sd1, c_ab: 4'sd0,
                     c_ay: 4'sd1, c_by: 4'sd1, c_aby: 4'sd1};
      G_OR:    c = '{c_a: 4'sd0, c_b: 4'sd0, c_y: 4'sd1, c_ab: 4'sd0,
                     c_ay: 4'sd1, c_by: 4'sd1, c_aby: -4'sd1};
      G_XOR:   c = '{c_a: 4'sd0, c_b: 4'sd0, c_y: 4'sd0, c_ab: 4'sd0,
                     c_ay: 4'sd0, c_by: 4'sd0, c_aby: -4'sd2};
      default: c = '{c_a: 4'sd0, c_b: 4'sd0, c_y: 4'sd0, c_ab: 4'sd0,
                     c_ay: 4'sd0, c_by: 4'sd0, c_aby: 4'sd2};
    endcase
    return c;
  endfunction

  // ---------------------------------------------------------------------
  // Spin numbering of an N-bit invertible adder Y = A + B:
  //   0 .. N-1        A[0..N-1]
  //   N .. 2N-1       B[0..N-1]
  //   2N .. 3N        Y[0..N]   (Y[N] is the carry out)
  //   3N+1+4(i-1)+k   for bit i = 1..N-1: k=0 carry in C_i, 1 P_i, 2 G_i, 3 Q_i
  // ---------------------------------------------------------------------
  function automatic int n_spins(int n);
    return 7 * n - 3;
  endfunction

  function automatic int n_gates(int n);
    return 5 * n - 3;
  endfunction

  function automatic int a_idx(int n, int i); return i;             endfunction
  function automatic int b_idx(int n, int i); return n + i;         endfunction
  function automatic int y_idx(int n, int i); return 2 * n + i;     endfunction

  // Carry into bit i (1 <= i <= n); the carry into bit n is Y[n].
  function automatic int c_idx(int n, int i);
    return (i == n) ? y_idx(n, n) : 3 * n + 1 + 4 * (i - 1);
  endfunction
  function automatic int p_idx(int n, int i); return 3 * n + 2 + 4 * (i - 1); endfunction
  function automatic int g_idx(int n, int i); return 3 * n + 3 + 4 * (i - 1); endfunction
  function automatic int q_idx(int n, int i); return 3 * n + 4 + 4 * (i - 1); endfunction

  function automatic gate_t mk_gate(gate_e k, int a, int b, int y);
    gate_t g;
    g.kind = k;
    g.a    = 16'(a);
    g.b    = 16'(b);
    g.y    = 16'(y);
    return g;
  endfunction

  // Gate number g (0 .. n_gates(n)-1) of the N-bit ripple-carry adder.
  function automatic gate_t adder_gate(int n, int g);
    int i, k;
    if (g == 0) return mk_gate(G_XOR, a_idx(n, 0), b_idx(n, 0), y_idx(n, 0));
    if (g == 1) return mk_gate(G_AND, a_idx(n, 0), b_idx(n, 0), c_idx(n, 1));
    i = (g - 2) / 5 + 1;
    k = (g - 2) % 5;
    case (k)
      0:       return mk_gate(G_XOR, a_idx(n, i), b_idx(n, i), p_idx(n, i));
      1:       return mk_gate(G_AND, a_idx(n, i), b_idx(n, i), g_idx(n, i));
      2:       return mk_gate(G_XOR, p_idx(n, i), c_idx(n, i), y_idx(n, i));
      3:       return mk_gate(G_AND, p_idx(n, i), c_idx(n, i), q_idx(n, i));
      default: return mk_gate(G_OR,  g_idx(n, i), q_idx(n, i), c_idx(n, i + 1));
    endcase
  endfunction

  // Index of the k-th gate (k = 0 ..) that spin s belongs to, or -1.
  function automatic int member_gate(int n, int s, int k);
    int found;
    gate_t g;
    found = 0;
    for (int j = 0; j < n_gates(n); j++) begin
      g = adder_gate(n, j);
      if (int'(g.a) == s || int'(g.b) == s || int'(g.y) == s) begin
        if (found == k) return j;
        found++;
      end
    end
    return -1;
  endfunction

endpackage
