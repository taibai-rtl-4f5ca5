// stage_ctrl: chip-level working-stage controller (INIT, INTEG, FIRE).
//
// The chip works in three stages. In INIT the host loads the model through
// memory-access packets while every neuron core rests. Then each timestep is
// an INTEG stage (spikes travel and currents are accumulated, event-driven)
// followed by a FIRE stage (every core updates its neurons and marks the ones
// that fire). The paper lets the compiler choose the cycles per timestep and
// also says FIRE begins once no spike events are left in the network; this
// controller does both: INTEG lasts at least integ_cycles and until
// net_idle (no packet buffered anywhere, every scheduler and core idle);
// FIRE lasts at least fire_cycles and until cores_idle (every core back in
// RECV). Minimum stage length is 2 cycles so that idle flags can respond to
// the stage change.
//
// Interface: start (pulse, in INIT) begins timestep 0; timesteps = 0 runs
// forever, otherwise the controller returns to INIT after that many
// timesteps and pulses done. fire_start pulses in the first FIRE cycle.
module stage_ctrl
  import taibai_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic [15:0] timesteps,
  input  logic [15:0] integ_cycles,
  input  logic [15:0] fire_cycles,
  input  logic        net_idle,
  input  logic        cores_idle,
  output stage_e      stage,
  output logic        fire_start,
  output logic [15:0] timestep,
  output logic        done
);
  logic [15:0] cyc;

  always_ff @(posedge clk) begin
    if (rst) begin
      stage      <= ST_INIT;
      cyc        <= '0;
      timestep   <= '0;
      fire_start <= 1'b0;
      done       <= 1'b0;
    end else begin
      fire_start <= 1'b0;
      done       <= 1'b0;
      cyc        <= cyc + 1'b1;
      unique case (stage)
        ST_INIT: if (start) begin
          stage    <= ST_INTEG;
          cyc      <= '0;
          timestep <= '0;
        end
        ST_INTEG: if (cyc + 1'b1 >= integ_cycles && cyc >= 16'd1 && net_idle) begin
          stage      <= ST_FIRE;
          cyc        <= '0;
          fire_start <= 1'b1;
        end
        ST_FIRE: if (cyc + 1'b1 >= fire_cycles && cyc >= 16'd1 && cores_idle) begin
          cyc <= '0;
          if (timesteps != 0 && timestep + 1'b1 == timesteps) begin
            stage <= ST_INIT;
            done  <= 1'b1;
          end else begin
            stage <= ST_INTEG;
          end
          timestep <= timestep + 1'b1;
        end
        default: stage <= ST_INIT;
      endcase
    end
  end
endmodule
