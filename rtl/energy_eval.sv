// energy_eval: Hamiltonian of the invertible ripple-carry adder and its
// minimum-energy (convergence) flag.
//
// The network's Hamiltonian is the sum of its gates' three-body Hamiltonians
//   H_g = -(c_A m_A + c_B m_B + c_Y m_Y + c_AB m_A m_B + c_AY m_A m_Y
//           + c_BY m_B m_Y + c_ABY m_A m_B m_Y),   m = 2s - 1,
// with the coefficients of cil_pkg. Every gate has energy -2 in its valid
// states and +2 otherwise, so the global minimum is -2 * (number of gates),
// reached exactly when every gate holds, i.e. when A + B = Y and all internal
// nodes are consistent. at_emin reports that. The paper tests convergence to
// E_min in simulation; this block is the hardware form of that test (own
// choice). Purely combinational.
//
// Ports: s (all spin bits, numbered as in cil_pkg), energy, at_emin.
module energy_eval
  import cil_pkg::*;
#(
  parameter int WIDTH = 4,
  parameter int NS    = n_spins(WIDTH),
  parameter int NG    = n_gates(WIDTH)
) (
  input  logic [NS-1:0]     s,
  output logic signed [15:0] energy,
  output logic              at_emin
);
  localparam int EMIN = GATE_EMIN * NG;

  logic signed [7:0] e_gate [NG];

  for (genvar g = 0; g < NG; g++) begin : g_gate
    localparam gate_t      G = adder_gate(WIDTH, g);
    localparam gate_coef_t C = gate_coef(G.kind);
    localparam int IA = int'(G.a);
    localparam int IB = int'(G.b);
    localparam int IY = int'(G.y);
    logic signed [7:0] ma, mb, my;
    always_comb begin
      ma = s[IA] ? 8'sd1 : -8'sd1;
      mb = s[IB] ? 8'sd1 : -8'sd1;
      my = s[IY] ? 8'sd1 : -8'sd1;
      e_gate[g] = -( 8'(C.c_a) * ma + 8'(C.c_b) * mb + 8'(C.c_y) * my
                   + 8'(C.c_ab) * ma * mb + 8'(C.c_ay) * ma * my
                   + 8'(C.c_by) * mb * my + 8'(C.c_aby) * ma * mb * my);
    end
  end

  always_comb begin
    energy = '0;
    for (int g = 0; g < NG; g++) energy += 16'(e_gate[g]);
    at_emin = (energy == 16'(EMIN));
  end
endmodule
