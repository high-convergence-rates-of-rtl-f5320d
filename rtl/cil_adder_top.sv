// cil_adder_top: three-body CMOS invertible-logic adder with its annealing
// control, ready to run forward (A, B given, Y found) or backward (Y given,
// some A and B with A + B = Y found).
//
// Blocks: inv_adder (the spin network), rng_xorshift (one random bit per
// spin per cycle for the w_rnd noise term), i0_ctrl (the shot schedule:
// I0min for T cycles, then I0max for T cycles, repeated) and energy_eval
// (the network Hamiltonian and its E_min flag, tested at the end of every
// shot).
//
// Operation: a one-cycle start latches mode and the operands, loads the
// random generator with seed, puts every spin counter in its neutral state
// and starts the first shot. Every cycle of a run all spins update once. In
// the last cycle of each shot the state is tested: if it is at E_min, or
// max_shots shots have run, the run ends; done pulses one cycle later, with
// converged, shots_used and the spin values of A, B and Y captured at that
// last test (a_out, b_out, y_out). A run of n shots takes n * 2 * T_CYCLES
// cycles from the cycle after start. energy and at_emin show the live state.
//
// The paper gives the spin gate, the schedule numbers (I0min 2, I0max 4,
// T 100, w_rnd 3) and the adder's gate structure; the start/done handshake,
// the end-of-shot convergence test and the seeding are this design's own.
module cil_adder_top
  import cil_pkg::*;
#(
  parameter int WIDTH    = 4,
  parameter int T_CYCLES = T_DEF,
  parameter int I0_MIN   = I0_MIN_DEF,
  parameter int I0_MAX   = I0_MAX_DEF,
  parameter int W_RND    = W_RND_DEF,
  parameter int SHOT_W   = 8,
  parameter int I0_W     = $clog2(I0_MAX + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  mode_e              mode,
  input  logic [WIDTH-1:0]   a_in,
  input  logic [WIDTH-1:0]   b_in,
  input  logic [WIDTH:0]     y_in,
  input  logic [SHOT_W-1:0]  max_shots,
  input  logic [31:0]        seed,
  output logic               busy,
  output logic               done,
  output logic               converged,
  output logic [SHOT_W-1:0]  shots_used,
  output logic [WIDTH-1:0]   a_out,
  output logic [WIDTH-1:0]   b_out,
  output logic [WIDTH:0]     y_out,
  output logic signed [15:0] energy,
  output logic               at_emin,
  output logic [I0_W-1:0]    i0,
  output phase_e             phase
);
  localparam int NS = n_spins(WIDTH);

  mode_e            mode_q;
  logic [WIDTH-1:0] a_q, b_q;
  logic [WIDTH:0]   y_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q <= MODE_FORWARD;
      a_q    <= '0;
      b_q    <= '0;
      y_q    <= '0;
    end else if (start) begin
      mode_q <= mode;
      a_q    <= a_in;
      b_q    <= b_in;
      y_q    <= y_in;
    end
  end

  // Clamps: forward fixes A and B, backward fixes Y.
  logic [NS-1:0] clamp_en, clamp_val;
  always_comb begin
    clamp_en  = '0;
    clamp_val = '0;
    for (int i = 0; i < WIDTH; i++) begin
      clamp_en [a_idx(WIDTH, i)] = (mode_q == MODE_FORWARD);
      clamp_val[a_idx(WIDTH, i)] = a_q[i];
      clamp_en [b_idx(WIDTH, i)] = (mode_q == MODE_FORWARD);
      clamp_val[b_idx(WIDTH, i)] = b_q[i];
    end
    for (int i = 0; i <= WIDTH; i++) begin
      clamp_en [y_idx(WIDTH, i)] = (mode_q == MODE_BACKWARD);
      clamp_val[y_idx(WIDTH, i)] = y_q[i];
    end
  end

  logic          running, shot_end, ctrl_done, ctrl_conv;
  logic [NS-1:0] rnd, spins;

  rng_xorshift #(.NBITS(NS)) u_rng (
    .clk, .rst_n,
    .load(start),
    .seed,
    .en  (running),
    .bits(rnd)
  );

  inv_adder #(
    .WIDTH(WIDTH), .W_RND(W_RND), .I0_MAX(I0_MAX), .I0_W(I0_W)
  ) u_adder (
    .clk, .rst_n,
    .en      (running),
    .init    (start),
    .i0,
    .rnd,
    .clamp_en,
    .clamp_val,
    .spins
  );

  energy_eval #(.WIDTH(WIDTH)) u_energy (
    .s      (spins),
    .energy,
    .at_emin
  );

  i0_ctrl #(
    .T_CYCLES(T_CYCLES), .I0_MIN(I0_MIN), .I0_MAX(I0_MAX),
    .SHOT_W(SHOT_W), .I0_W(I0_W)
  ) u_ctrl (
    .clk, .rst_n, .start, .max_shots,
    .conv      (at_emin),
    .i0,
    .phase,
    .running,
    .shot_end,
    .done      (ctrl_done),
    .converged (ctrl_conv),
    .shots_used
  );

  // Capture the operands' spins at every shot end; the last capture is the
  // answer of the run.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0;
      b_out <= '0;
      y_out <= '0;
    end else if (shot_end) begin
      for (int i = 0; i < WIDTH; i++) begin
        a_out[i] <= spins[a_idx(WIDTH, i)];
        b_out[i] <= spins[b_idx(WIDTH, i)];
      end
      for (int i = 0; i <= WIDTH; i++) y_out[i] <= spins[y_idx(WIDTH, i)];
    end
  end

  assign busy      = running;
  assign done      = ctrl_done;
  assign converged = ctrl_conv;
endmodule
