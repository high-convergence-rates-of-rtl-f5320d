// rng_xorshift: pseudo-random bit source for the noise term
// w_rnd * sgn(rnd(-1,+1)) of every spin.
//
// The paper says only that the random signals may come from a linear
// feedback shift register or from xorshift. This block uses xorshift32
// (x ^= x<<13; x ^= x>>17; x ^= x<<5), as many 32-bit lanes as are needed
// to give NBITS fresh bits per cycle; lane k is seeded with
// seed ^ (k * 32'h9E3779B9), and a lane whose seed would be zero gets
// 32'h2545F491 instead, because zero is the one state xorshift cannot leave.
//
// Interface: load (synchronous) takes the seed; en advances every lane by one
// step. bits is the concatenated lane state, so bit b comes from lane b/32.
// Timing: bits changes the cycle after an enabled step.
module rng_xorshift #(
  parameter int NBITS = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [31:0]       seed,
  input  logic              en,
  output logic [NBITS-1:0]  bits
);
  localparam int LANES = (NBITS + 31) / 32;

  logic [31:0] st [LANES];

  function automatic logic [31:0] xs32(logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  function automatic logic [31:0] lane_seed(logic [31:0] sd, int k);
    logic [31:0] v;
    v = sd ^ (32'(k) * 32'h9E3779B9);
    return (v == '0) ? 32'h2545F491 : v;
  endfunction

  for (genvar k = 0; k < LANES; k++) begin : g_lane
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)    st[k] <= lane_seed(32'h1, k);
      else if (load) st[k] <= lane_seed(seed, k);
      else if (en)   st[k] <= xs32(st[k]);
    end
    for (genvar b = 0; b < 32; b++) begin : g_bit
      if (k * 32 + b < NBITS) begin : g_use
        assign bits[k*32+b] = st[k][b];
      end
    end
  end
endmodule
