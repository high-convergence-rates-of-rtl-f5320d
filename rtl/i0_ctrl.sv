// i0_ctrl: annealing schedule of the pseudo inverse temperature I0.
//
// One "shot" is 2*T_CYCLES cycles: I0 = I0_MIN for the first T_CYCLES
// cycles, which lets the spins wander, then I0 = I0_MAX for T_CYCLES
// cycles, which lets them settle. Shots repeat until the network is found
// at its minimum energy at the end of a shot, or until max_shots shots have
// run. The paper gives I0min = 2, I0max = 4 and T = 100 and the waveform of
// two shots; it does not say when convergence is tested, so this design tests
// it once per shot, in the last cycle of the I0_MAX phase (own choice).
//
// Interface: start (one cycle) begins a run, may restart one, and latches
// max_shots (0 counts as 1); conv is the
// minimum-energy flag of the network, sampled in the shot_end cycle; running
// is high for the whole run; shot_end marks the last cycle of each shot; done
// pulses one cycle after the last shot_end, when converged and shots_used
// (shots run, 1 .. max_shots) become valid.
// Timing: a run of n shots keeps running high for exactly n*2*T_CYCLES cycles.
module i0_ctrl
  import cil_pkg::*;
#(
  parameter int T_CYCLES = 100,
  parameter int I0_MIN   = 2,
  parameter int I0_MAX   = 4,
  parameter int SHOT_W   = 8,
  parameter int I0_W     = $clog2(I0_MAX + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [SHOT_W-1:0] max_shots,
  input  logic              conv,
  output logic [I0_W-1:0]   i0,
  output phase_e            phase,
  output logic              running,
  output logic              shot_end,
  output logic              done,
  output logic              converged,
  output logic [SHOT_W-1:0] shots_used
);
  localparam int CYC_W = $clog2(T_CYCLES + 1);

  logic [CYC_W-1:0]  cyc;
  logic [SHOT_W-1:0] shot;      // completed shots in this run
  logic [SHOT_W-1:0] limit;     // max_shots latched at start
  logic              last_shot;

  always_comb begin
    shot_end  = running && (phase == PH_HIGH) && (cyc == CYC_W'(T_CYCLES - 1));
    last_shot = (shot + SHOT_W'(1)) >= limit;
    i0        = (running && phase == PH_HIGH) ? I0_W'(I0_MAX) : I0_W'(I0_MIN);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running    <= 1'b0;
      phase      <= PH_LOW;
      cyc        <= '0;
      shot       <= '0;
      done       <= 1'b0;
      converged  <= 1'b0;
      shots_used <= '0;
      limit      <= SHOT_W'(1);
    end else begin
      done <= 1'b0;
      if (start) begin
        running    <= 1'b1;
        phase      <= PH_LOW;
        cyc        <= '0;
        shot       <= '0;
        converged  <= 1'b0;
        shots_used <= '0;
        limit      <= (max_shots == '0) ? SHOT_W'(1) : max_shots;
      end else if (running) begin
        if (cyc == CYC_W'(T_CYCLES - 1)) begin
          cyc <= '0;
          if (phase == PH_LOW) begin
            phase <= PH_HIGH;
          end else begin
            shot  <= shot + SHOT_W'(1);
            phase <= PH_LOW;
            if (conv || last_shot) begin
              running    <= 1'b0;
              done       <= 1'b1;
              converged  <= conv;
              shots_used <= shot + SHOT_W'(1);
            end
          end
        end else begin
          cyc <= cyc + CYC_W'(1);
        end
      end
    end
  end

`ifndef SYNTHESIS
  // The schedule only ever produces the two temperatures of the paper.
  a_i0_levels: assert property (@(posedge clk) disable iff (!rst_n)
    (i0 == I0_W'(I0_MIN)) || (i0 == I0_W'(I0_MAX)));
  a_done_after_end: assert property (@(posedge clk) disable iff (!rst_n)
    done |-> !running);
`endif
endmodule
