// three_body_mult: stochastic product c_ijk * m_j * m_k for one three-body
// interaction.
//
// The product of two bipolar spins m_j*m_k is +1 when the spin bits agree
// and -1 when they differ, so it is the XNOR of s_j and s_k. As in the
// spin-gate figure of the paper, the XNOR drives the select of a two-input
// multiplexer that passes c_ijk (select 1) or its negation (select 0).
// This XNOR is the only gate the three-body spin gate adds to a two-body one.
// Purely combinational.
//
// Ports: s_j, s_k (spin bits), c (signed coefficient), p (signed product).
module three_body_mult #(
  parameter int W = 8
) (
  input  logic                s_j,
  input  logic                s_k,
  input  logic signed [W-1:0] c,
  output logic signed [W-1:0] p
);
  logic sel;
  always_comb begin
    sel = ~(s_j ^ s_k);
    p   = sel ? c : -c;
  end
endmodule
