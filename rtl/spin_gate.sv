// spin_gate: one probabilistic spin of a three-body invertible-logic circuit.
//
// It realises
//   I_i(t+1) = c_i + sum_j c_ij m_j(t) + sum_(j,k) c_ijk m_j(t) m_k(t)
//              + w_rnd * sgn(rnd)
//   m_i(t+1) = sgn(tanh(I_i(t+1) * I0))
// in integral stochastic computing, as the paper's spin-gate figure shows:
// every two-body product is a multiplexer (two_body_mult), every three-body
// product an XNOR plus a multiplexer (three_body_mult), an adder sums them
// with c_i and the random term, and a saturated up/down counter with 2*I0
// states (stanh_counter) turns the sum into the next spin bit.
//
// N2 and N3 are the numbers of two-body and three-body terms; unused terms
// are given a zero coefficient. The random term is +W_RND when rnd = 1 and
// -W_RND when rnd = 0.
//
// Own choices: a clamped spin (clamp_en) outputs clamp_val at once and has
// its counter forced to the saturated state of clamp_val, so that it starts
// from that state when released; init puts the counter in its state -1. The
// adder is one combinational sum.
//
// Outputs: field is this cycle's local field I_i, cnt the counter state.
// Timing: one update per enabled cycle (tau = 1); s_i follows the counter
// register, or clamp_val at once while clamped.
module spin_gate #(
  parameter int N2     = 2,
  parameter int N3     = 1,
  parameter int CW     = 8,
  parameter int W_RND  = 3,
  parameter int I0_MAX = 4,
  parameter int I0_W   = $clog2(I0_MAX + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 init,
  input  logic [I0_W-1:0]      i0,
  input  logic signed [CW-1:0] c_i,
  input  logic signed [CW-1:0] c2    [N2],
  input  logic                 s2    [N2],
  input  logic signed [CW-1:0] c3    [N3],
  input  logic                 s3j   [N3],
  input  logic                 s3k   [N3],
  input  logic                 rnd,
  input  logic                 clamp_en,
  input  logic                 clamp_val,
  output logic signed [CW+3:0] field,
  output logic signed [$clog2(2*I0_MAX)-1:0] cnt,
  output logic                 s_i
);
  localparam int FW = CW + 4;

  logic signed [CW-1:0] p2 [N2];
  logic signed [CW-1:0] p3 [N3];

  for (genvar j = 0; j < N2; j++) begin : g_two
    two_body_mult #(.W(CW)) u_m2 (.s_j(s2[j]), .c(c2[j]), .p(p2[j]));
  end
  for (genvar j = 0; j < N3; j++) begin : g_three
    three_body_mult #(.W(CW)) u_m3 (.s_j(s3j[j]), .s_k(s3k[j]), .c(c3[j]), .p(p3[j]));
  end

  always_comb begin
    field = FW'(c_i) + (rnd ? FW'(W_RND) : -FW'(W_RND));
    for (int j = 0; j < N2; j++) field += FW'(p2[j]);
    for (int j = 0; j < N3; j++) field += FW'(p3[j]);
  end

  logic s_cnt;

  stanh_counter #(.I0_MAX(I0_MAX), .IN_W(FW), .I0_W(I0_W)) u_stanh (
    .clk, .rst_n, .en, .init,
    .force_en (clamp_en),
    .force_val(clamp_val),
    .i0,
    .inc      (field),
    .cnt,
    .s        (s_cnt)
  );

  always_comb s_i = clamp_en ? clamp_val : s_cnt;
endmodule
