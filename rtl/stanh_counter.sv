// stanh_counter: saturated up/down counter that approximates
// sgn(tanh(I * I0)) in integral stochastic computing (the "Stanh" of the
// paper's spin gate, 2*I0 states).
//
// The counter is signed and holds one of the 2*i0 states -i0 .. i0-1. Every
// enabled cycle it adds the signed integer input inc (the local field of one
// spin for that cycle) and saturates to that range. The output spin bit is
// the sign test cnt >= 0. A larger i0 gives more states, so more evidence is
// needed to flip the spin: i0 plays the role of the pseudo inverse
// temperature. i0 may change between cycles (the annealing schedule switches
// it between I0min and I0max). Because the states are centred on zero, such
// a change never flips the output; a counter left outside the new range is
// pulled into it by its next update.
//
// Own choices (the paper gives only the name and the number of states): the
// centred signed encoding; init loads the state -1 (spin bit 0, one step from
// flipping); force loads the saturated end state of force_val (i0-1 or -i0),
// which is how a spin is clamped; reset is asynchronous and active low.
//
// Timing: cnt is a register; an input applied in cycle t shows on s in
// cycle t+1 (tau = 1).
module stanh_counter #(
  parameter int I0_MAX = 4,       // largest i0 supported
  parameter int IN_W   = 8,       // width of the signed increment
  parameter int I0_W   = $clog2(I0_MAX + 1),
  parameter int CNT_W  = $clog2(2 * I0_MAX)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    init,
  input  logic                    force_en,
  input  logic                    force_val,
  input  logic [I0_W-1:0]         i0,
  input  logic signed [IN_W-1:0]  inc,
  output logic signed [CNT_W-1:0] cnt,
  output logic                    s
);
  localparam int SW = (IN_W > CNT_W ? IN_W : CNT_W) + 3;

  logic signed [SW-1:0] hi, lo, sum, nxt;

  always_comb begin
    hi  = SW'(i0) - SW'(1);
    lo  = -SW'(i0);
    sum = SW'(cnt) + SW'(inc);
    if (sum < lo)      nxt = lo;
    else if (sum > hi) nxt = hi;
    else               nxt = sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        cnt <= -CNT_W'(1);
    else if (init)     cnt <= -CNT_W'(1);
    else if (force_en) cnt <= force_val ? CNT_W'(hi) : CNT_W'(lo);
    else if (en)       cnt <= CNT_W'(nxt);
  end

  always_comb s = ~cnt[CNT_W-1];
endmodule
