// spindrop_ctrl: sequencer of one Spatial-SpinDrop module.
//
// A dropout mask bit is produced by writing the MTJ stochastically and then
// reading it. On sample_req (accepted only while ready) the controller
//   1. drives SET for SET_CYCLES cycles (stochastic write),
//   2. raises Vpol and hold, first with Ctrl = 0 (latch precharge, one
//      cycle) and then with Ctrl = 1 (latch evaluation), SENSE_CYCLES in all,
//   3. drops hold and keeps Ctrl = 1, so the StrongARM latch holds the bit,
//      and raises mask_valid,
//   4. drives RESET for RESET_CYCLES cycles to put the MTJ back in the
//      parallel state, in the background, while the latched bit stays in use.
// A RESET also runs once after rst_n. Since no new read can happen while
// hold is low, the same mask stays in force for as long as the requester
// does not ask for a new one: for the N cycles of a convolution (mapping
// strategies 1 and 2), or a single read when a new mask is asked for each
// read (spatial dropout on flattened feature maps).
//
// Timing: mask_valid rises SET_CYCLES + SENSE_CYCLES cycles after the clock
// edge that accepts sample_req (15 cycles with the defaults: the paper's
// 15 ns sampling latency at an assumed 1 GHz clock), and falls in the cycle
// after that edge. ready returns RESET_CYCLES cycles after mask_valid rises.
//
// The paper gives the order of the phases and the roles of SET, RESET, Vpol,
// hold and Ctrl; the split of the 15 cycles between phases, the background
// RESET and the handshake are this design's own.
module spindrop_ctrl
  import spindrop_pkg::*;
#(
  parameter int unsigned SET_CYCLES   = 10,
  parameter int unsigned SENSE_CYCLES = 5,   // >= 2: precharge + evaluation
  parameter int unsigned RESET_CYCLES = 5
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sample_req,
  output logic ready,
  output logic mask_valid,
  // to the write circuit
  output logic set_en,
  output logic reset_en,
  // to the read circuit
  output logic vpol,
  output logic hold,
  output logic ctrl
);

  localparam int unsigned MAXC = (SET_CYCLES > SENSE_CYCLES) ?
      ((SET_CYCLES > RESET_CYCLES) ? SET_CYCLES : RESET_CYCLES) :
      ((SENSE_CYCLES > RESET_CYCLES) ? SENSE_CYCLES : RESET_CYCLES);
  localparam int unsigned CW = $clog2(MAXC + 1);

  sd_phase_e      phase;
  logic [CW-1:0]  cnt;
  logic           have_mask;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= SD_RESET;
      cnt       <= CW'(RESET_CYCLES - 1);
      have_mask <= 1'b0;
    end else begin
      unique case (phase)
        SD_RESET: begin
          if (cnt == '0) phase <= SD_READY;
          else           cnt   <= cnt - 1'b1;
        end
        SD_READY: begin
          if (sample_req) begin
            phase     <= SD_SET;
            cnt       <= CW'(SET_CYCLES - 1);
            have_mask <= 1'b0;
          end
        end
        SD_SET: begin
          if (cnt == '0) phase <= SD_PRE;
          else           cnt   <= cnt - 1'b1;
        end
        SD_PRE: begin
          phase <= SD_EVAL;
          cnt   <= CW'(SENSE_CYCLES - 2);
        end
        SD_EVAL: begin
          if (cnt == '0) begin
            phase     <= SD_RESET;
            cnt       <= CW'(RESET_CYCLES - 1);
            have_mask <= 1'b1;
          end else begin
            cnt <= cnt - 1'b1;
          end
        end
        default: phase <= SD_RESET;
      endcase
    end
  end

  always_comb begin
    set_en     = (phase == SD_SET);
    reset_en   = (phase == SD_RESET);
    vpol       = (phase == SD_PRE) || (phase == SD_EVAL);
    hold       = vpol;
    // Ctrl is low only for the precharge and until a first mask exists.
    ctrl       = (phase == SD_EVAL) || have_mask;
    ready      = (phase == SD_READY);
    mask_valid = have_mask;
  end

  // A request outside READY is ignored; the requester must wait for ready.
  a_set_reset: assert property (@(posedge clk) disable iff (!rst_n)
    !(set_en && reset_en));

endmodule
