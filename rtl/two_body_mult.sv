// two_body_mult: stochastic product c_ij * m_j for one two-body interaction.
//
// In bipolar stochastic computing a spin bit s_j stands for m_j = 2*s_j - 1,
// so c_ij * m_j is either +c_ij (s_j = 1) or -c_ij (s_j = 0). As in the
// spin-gate figure of the paper, this is a two-input multiplexer whose
// select is the spin bit, whose 1 input is c_ij and whose 0 input is the
// negated coefficient. Purely combinational.
//
// Ports: s_j (spin bit), c (signed coefficient), p (signed product).
// The coefficient width is a parameter; the negation is two's complement
// and coefficients are assumed to stay away from the most negative value.
module two_body_mult #(
  parameter int W = 8
) (
  input  logic                s_j,
  input  logic signed [W-1:0] c,
  output logic signed [W-1:0] p
);
  always_comb p = s_j ? c : -c;
endmodule
