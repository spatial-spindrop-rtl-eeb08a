// cim_layer_ctrl: sequencer of one convolutional layer on the CiM array.
//
// A layer run consists of n_cycles input cycles, one per position of the
// K x K moving window. For each input cycle the controller
//   1. waits for the flattened window (in_valid), latches it into the
//      bit-line/source-line drivers (x_load, the cycle in_ready is high),
//   2. if dropout is on and this is the first input cycle of the run (or
//      every cycle when resample_each is set), waits until all dropout
//      modules are ready, pulses sample_req to all of them and waits for
//      all_mask_valid: the spatial mask is drawn once and then held for the
//      remaining N-1 cycles,
//   3. selects the NGROUPS word-line groups one after the other (dec_addr =
//      group index), and for each group steps the bit-line multiplexer
//      through its MUX_RATIO settings with acc_en high, accumulating the
//      partial sums,
//   4. spends one cycle in LC_OUT with out_valid high, while the
//      accumulated sums and the activations are presented, and clears the
//      accumulators at its end.
// Writing weights happens while idle; path_enable is then low so the
// decoder reaches the rows directly. During a run path_enable follows
// drop_en, which, like resample_each, is latched at start.
//
// Timing per input cycle, from the in_valid/in_ready handshake to
// out_valid: NGROUPS*MUX_RATIO + 1 cycles without a new sample; a new
// sample adds the sampling latency plus two cycles (the request cycle and
// the cycle that sees mask_valid). done pulses with the last out_valid.
//
// The order (mask sampled in the first cycle and held for N-1 cycles,
// group-wise selection with accumulation until all word lines are
// selected, then activation) follows the paper; the handshakes and cycle
// budget are this design's choice.
module cim_layer_ctrl
  import spindrop_pkg::*;
#(
  parameter int unsigned NGROUPS   = 256,  // C_in: one group per input channel
  parameter int unsigned MUX_RATIO = 4,
  localparam int unsigned GW = (NGROUPS > 1) ? $clog2(NGROUPS) : 1,
  localparam int unsigned SW = (MUX_RATIO > 1) ? $clog2(MUX_RATIO) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // run control
  input  logic          start,
  input  logic [15:0]   n_cycles,       // input cycles N of the run, >= 1
  input  logic          drop_en,        // Bayesian (dropout) inference
  input  logic          resample_each,  // new mask every input cycle
  // input window handshake
  input  logic          in_valid,
  output logic          in_ready,
  output logic          x_load,
  // dropout modules
  input  logic          all_ready,
  input  logic          all_mask_valid,
  output logic          sample_req,
  output logic          path_enable,
  // array side
  output logic          dec_en,
  output logic [GW-1:0] dec_addr,
  output logic [SW-1:0] mux_sel,
  output logic          acc_en,
  output logic          acc_clear,
  // status
  output logic          out_valid,
  output logic          busy,
  output logic          done,
  output logic [15:0]   cycle_idx
);

  lc_phase_e     phase;
  logic [GW-1:0] grp;
  logic [SW-1:0] msel;
  logic          req_sent;
  logic [15:0]   ncyc;
  logic          need_mask;
  logic          drop_q, resample_q;   // run mode, latched at start

  assign need_mask = drop_q && ((cycle_idx == 16'd0) || resample_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= LC_IDLE;
      grp       <= '0;
      msel      <= '0;
      req_sent  <= 1'b0;
      ncyc      <= 16'd1;
      cycle_idx <= '0;
      drop_q    <= 1'b0;
      resample_q <= 1'b0;
    end else begin
      unique case (phase)
        LC_IDLE: begin
          if (start) begin
            phase     <= LC_WAIT_IN;
            cycle_idx <= '0;
            ncyc      <= (n_cycles == 16'd0) ? 16'd1 : n_cycles;
            drop_q    <= drop_en;
            resample_q <= resample_each;
          end
        end
        LC_WAIT_IN: begin
          if (in_valid) begin
            grp      <= '0;
            msel     <= '0;
            req_sent <= 1'b0;
            phase    <= need_mask ? LC_SAMPLE : LC_MVM;
          end
        end
        LC_SAMPLE: begin
          if (!req_sent) begin
            if (all_ready) req_sent <= 1'b1;
          end else if (all_mask_valid) begin
            phase <= LC_MVM;
          end
        end
        LC_MVM: begin
          if (msel == SW'(MUX_RATIO - 1)) begin
            msel <= '0;
            if (grp == GW'(NGROUPS - 1)) phase <= LC_OUT;
            else                         grp   <= grp + 1'b1;
          end else begin
            msel <= msel + 1'b1;
          end
        end
        LC_OUT: begin
          if (cycle_idx == ncyc - 16'd1) begin
            phase     <= LC_IDLE;
            cycle_idx <= '0;
          end else begin
            phase     <= LC_WAIT_IN;
            cycle_idx <= cycle_idx + 16'd1;
          end
        end
        default: phase <= LC_IDLE;
      endcase
    end
  end

  always_comb begin
    in_ready    = (phase == LC_WAIT_IN);
    x_load      = in_ready && in_valid;
    sample_req  = (phase == LC_SAMPLE) && !req_sent && all_ready;
    path_enable = (phase != LC_IDLE) && drop_q;
    dec_en      = (phase == LC_MVM);
    dec_addr    = grp;
    mux_sel     = msel;
    acc_en      = (phase == LC_MVM);
    acc_clear   = (phase == LC_OUT);
    out_valid   = (phase == LC_OUT);
    busy        = (phase != LC_IDLE);
    done        = (phase == LC_OUT) && (cycle_idx == ncyc - 16'd1);
  end

  // The mask must be valid whenever rows are read through the dropout path.
  a_mask_valid: assert property (@(posedge clk) disable iff (!rst_n)
    (phase == LC_MVM && drop_q) |-> all_mask_valid);

endmodule
