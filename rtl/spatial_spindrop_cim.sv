// spatial_spindrop_cim: one binary convolutional layer on an STT-MRAM
// compute-in-memory array with Spatial-SpinDrop (spatial dropout) for Monte
// Carlo Bayesian inference.
//
// The layer's K x K x C_in x C_out binary kernel is stored in MTJ
// crossbars. Each of the C_in input feature maps owns one Spatial-SpinDrop
// module, which draws one Bernoulli bit (keep with probability 1 - p) per
// forward pass and keeps or drops all the word lines that carry that feature
// map. STRATEGY selects the mapping:
//   1: one crossbar of K*K*C_in rows x C_out columns; each kernel is
//      unrolled into a column, rows c*K*K .. c*K*K+K*K-1 hold channel c, and
//      dropout module c gates those K*K consecutive word lines of the one
//      decoder.
//   2: K*K crossbars of C_in rows x C_out columns, one per kernel position
//      k, each with its own decoder; dropout module c gates row c of every
//      one of the K*K crossbars.
// Both mappings hold the same weights and give the same sums for the same
// mask; only the wiring of the dropout modules differs.
//
// Data path: decoder(s) -> dropout gates -> crossbar(s) -> bit-line
// multiplexer -> ADCs -> (strategy 2: sum over the K*K crossbars) ->
// shift-add accumulators -> comparator (binary activation) and, for a last
// layer, the Monte Carlo averaging block. cim_layer_ctrl sequences it: one
// word-line group (one input channel) per step, MUX_RATIO cycles per step.
//
// Interface:
//   Weights: while busy is low, w_we writes w_data (one bit per output
//   channel) into logical row w_row = c*K*K + k (channel c, kernel position
//   k = ky*K + kx); the dropout path is bypassed for writing.
//   Thresholds: thr_we writes the activation threshold of column thr_col.
//   Run: start with n_cycles = N (moving-window positions), drop_en
//   (dropout on), resample_each (new mask every input cycle, used when the
//   dropped maps are flattened and read in one cycle), module_en (the
//   Enable input of each dropout module). Each window x is given with
//   in_valid / in_ready, bit r = c*K*K + k as for the weights. out_valid
//   marks out_sum (per-column XNOR count over the kept rows) and out_act
//   (count >= threshold) for that window; done marks the last one.
//   keep_mask shows the mask in force. With avg_en, every out_valid also
//   feeds the averaging block, which gives avg_sum after 2**LOG2_T of them;
//   avg_count counts the passes gathered so far.
//
// Following the paper: one dropout module per input feature map instead of
// one per row, mask drawn at the first input cycle and held for N-1
// cycles, the two mappings and their dropout wiring, the adapted decoder,
// MUX/ADC/shift-add/comparator/average chain, dropout bypassed while
// writing, and the layer size C_in = 256, K = 3, C_out = 512 of the paper's
// overhead evaluation. This design's own: all timing in clock cycles, the
// multiplexer ratio, ADC width, T, the XNOR count as column current, and
// the handshakes. The physical tiling into 64 x 32 arrays is not modelled.
module spatial_spindrop_cim
  import spindrop_pkg::*;
#(
  parameter int unsigned STRATEGY     = 1,
  parameter int unsigned K            = 3,
  parameter int unsigned C_IN         = 256,
  parameter int unsigned C_OUT        = 512,
  parameter int unsigned MUX_RATIO    = 4,
  parameter int unsigned ADC_BITS     = 4,
  parameter int unsigned LOG2_T       = 4,
  parameter int unsigned P_SET_Q16    = P_DROP_Q16,
  parameter int unsigned SET_CYCLES   = 10,
  parameter int unsigned SENSE_CYCLES = 5,
  parameter int unsigned RESET_CYCLES = 5,
  localparam int unsigned KK    = K * K,
  localparam int unsigned ROWS  = KK * C_IN,
  localparam int unsigned RW    = $clog2(ROWS),
  localparam int unsigned ACC_W = $clog2(ROWS + 1),
  localparam int unsigned CAW   = (C_OUT > 1) ? $clog2(C_OUT) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // weight and threshold programming
  input  logic             w_we,
  input  logic [RW-1:0]    w_row,
  input  logic [C_OUT-1:0] w_data,
  input  logic             thr_we,
  input  logic [CAW-1:0]   thr_col,
  input  logic [ACC_W-1:0] thr_data,
  // run control
  input  logic             start,
  input  logic [15:0]      n_cycles,
  input  logic             drop_en,
  input  logic             resample_each,
  input  logic             avg_en,
  input  logic [C_IN-1:0]  module_en,
  // input windows
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [ROWS-1:0]  x,
  // results
  output logic             out_valid,
  output logic [C_OUT-1:0] out_act,
  output logic [ACC_W-1:0] out_sum [C_OUT],
  output logic             done,
  output logic             busy,
  output logic [15:0]      cycle_idx,
  output logic             avg_valid,
  output logic [ACC_W-1:0] avg_sum [C_OUT],
  output logic [LOG2_T:0]  avg_count,
  output logic [C_IN-1:0]  keep_mask,
  output logic             adc_sat
);

  localparam int unsigned LANES = C_OUT / MUX_RATIO;
  localparam int unsigned GW    = (C_IN > 1) ? $clog2(C_IN) : 1;
  localparam int unsigned SW    = (MUX_RATIO > 1) ? $clog2(MUX_RATIO) : 1;
  localparam int unsigned LSW   = ADC_BITS + $clog2(KK + 1);

  // ---------------------------------------------------------------- control
  logic          x_load, sample_req, path_enable;
  logic          dec_en, acc_en, acc_clear;
  logic [GW-1:0] dec_addr;
  logic [SW-1:0] mux_sel;
  logic          all_ready, all_mask_valid;
  logic [C_IN-1:0] d_ready, d_valid;
  logic          w_we_ok;

  assign w_we_ok = w_we && !busy;

  cim_layer_ctrl #(.NGROUPS(C_IN), .MUX_RATIO(MUX_RATIO)) u_ctrl (
    .clk, .rst_n, .start, .n_cycles, .drop_en, .resample_each,
    .in_valid, .in_ready, .x_load,
    .all_ready, .all_mask_valid, .sample_req, .path_enable,
    .dec_en, .dec_addr, .mux_sel, .acc_en, .acc_clear,
    .out_valid, .busy, .done, .cycle_idx
  );

  assign all_ready      = &d_ready;
  assign all_mask_valid = &d_valid;

  // Bit-line / source-line driver input latch.
  logic [ROWS-1:0] x_reg;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      x_reg <= '0;
    else if (x_load) x_reg <= x;
  end

  // ------------------------------------------------------- dropout modules
  logic [KK-1:0] dwl_in  [C_IN];
  logic [KK-1:0] dwl_out [C_IN];

  for (genvar c = 0; c < C_IN; c++) begin : g_drop
    spatial_spindrop #(
      .GROUP(KK), .P_SET_Q16(P_SET_Q16), .SET_CYCLES(SET_CYCLES),
      .SENSE_CYCLES(SENSE_CYCLES), .RESET_CYCLES(RESET_CYCLES)
    ) u_sd (
      .clk, .rst_n, .sample_req, .enable(module_en[c]), .path_enable,
      .wl_in(dwl_in[c]), .ready(d_ready[c]), .mask_valid(d_valid[c]),
      .keep(keep_mask[c]), .wl_out(dwl_out[c])
    );
  end

  // ------------------------------------------------- array, MUX, ADC lanes
  logic [LSW-1:0] lane_sum [LANES];
  logic           sat_any;

  if (STRATEGY == 1) begin : g_s1
    localparam int unsigned CW = $clog2(ROWS + 1);
    logic [ROWS-1:0] wl_dec, wl_x;
    logic [CW-1:0]   col  [C_OUT];
    logic [CW-1:0]   lane [LANES];
    logic [ADC_BITS-1:0] code [LANES];
    logic [LANES-1:0]    sat;

    wl_decoder #(.ROWS(ROWS), .GROUP(KK)) u_dec (
      .en        (busy ? dec_en : w_we_ok),
      .group_mode(busy),
      .addr      (busy ? RW'(dec_addr) : w_row),
      .wl        (wl_dec)
    );

    for (genvar c = 0; c < C_IN; c++) begin : g_wire
      assign dwl_in[c]             = wl_dec[c*KK +: KK];
      assign wl_x[c*KK +: KK]      = dwl_out[c];
    end

    cim_crossbar #(.ROWS(ROWS), .COLS(C_OUT)) u_xbar (
      .clk, .we(w_we_ok), .wl(wl_x), .wdata(w_data), .x(x_reg), .col_cnt(col)
    );

    bl_mux #(.COLS(C_OUT), .RATIO(MUX_RATIO), .W(CW)) u_mux (
      .col, .sel(mux_sel), .lane
    );

    for (genvar a = 0; a < LANES; a++) begin : g_adc
      cim_adc #(.IN_W(CW), .BITS(ADC_BITS)) u_adc (
        .current(lane[a]), .code(code[a]), .sat(sat[a])
      );
      assign lane_sum[a] = LSW'(code[a]);
    end
    assign sat_any = |sat;

  end else begin : g_s2
    localparam int unsigned CW2 = $clog2(C_IN + 1);
    localparam int unsigned AW2 = (C_IN > 1) ? $clog2(C_IN) : 1;
    logic [C_IN-1:0]     wl_dec [KK];
    logic [C_IN-1:0]     wl_x   [KK];
    logic [C_IN-1:0]     xk     [KK];
    logic [ADC_BITS-1:0] code   [KK][LANES];
    logic [LANES-1:0]    sat    [KK];
    logic [KK-1:0]       sat_k;

    for (genvar k = 0; k < KK; k++) begin : g_xbar
      logic [CW2-1:0] col  [C_OUT];
      logic [CW2-1:0] lane [LANES];

      wl_decoder #(.ROWS(C_IN), .GROUP(1)) u_dec (
        .en        (busy ? dec_en : (w_we_ok && (32'(w_row) % KK == k))),
        .group_mode(busy),
        .addr      (busy ? AW2'(dec_addr) : AW2'(32'(w_row) / KK)),
        .wl        (wl_dec[k])
      );

      for (genvar c = 0; c < C_IN; c++) begin : g_wire
        assign dwl_in[c][k] = wl_dec[k][c];
        assign wl_x[k][c]   = dwl_out[c][k];
        assign xk[k][c]     = x_reg[c*KK + k];
      end

      cim_crossbar #(.ROWS(C_IN), .COLS(C_OUT)) u_xbar (
        .clk, .we(w_we_ok), .wl(wl_x[k]), .wdata(w_data), .x(xk[k]), .col_cnt(col)
      );

      bl_mux #(.COLS(C_OUT), .RATIO(MUX_RATIO), .W(CW2)) u_mux (
        .col, .sel(mux_sel), .lane
      );

      for (genvar a = 0; a < LANES; a++) begin : g_adc
        cim_adc #(.IN_W(CW2), .BITS(ADC_BITS)) u_adc (
          .current(lane[a]), .code(code[k][a]), .sat(sat[k][a])
        );
      end
      assign sat_k[k] = |sat[k];
    end

    // Partial sums of the K*K crossbars are added before accumulation.
    always_comb begin
      for (int unsigned a = 0; a < LANES; a++) begin
        lane_sum[a] = '0;
        for (int unsigned k = 0; k < KK; k++) lane_sum[a] = lane_sum[a] + LSW'(code[k][a]);
      end
    end
    assign sat_any = |sat_k;
  end

  // ------------------------------------------- accumulation and activation
  logic [ACC_W-1:0] acc [C_OUT];

  shift_add #(.COLS(C_OUT), .RATIO(MUX_RATIO), .IN_W(LSW), .ACC_W(ACC_W)) u_sa (
    .clk, .rst_n, .clear(acc_clear), .en(acc_en), .sel(mux_sel),
    .shift(3'd0), .lane(lane_sum), .acc
  );

  act_comparator #(.COLS(C_OUT), .ACC_W(ACC_W)) u_cmp (
    .clk, .rst_n, .thr_we, .thr_col, .thr_data, .acc, .act(out_act)
  );

  mc_average #(.COLS(C_OUT), .IN_W(ACC_W), .LOG2_T(LOG2_T)) u_avg (
    .clk, .rst_n, .clear(!avg_en), .in_valid(out_valid && avg_en),
    .value(acc), .avg_valid, .avg(avg_sum), .count(avg_count)
  );

  assign out_sum = acc;

  // ADC saturation is sticky for the run, for observation.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                adc_sat <= 1'b0;
    else if (start && !busy)   adc_sat <= 1'b0;
    else if (acc_en && sat_any) adc_sat <= 1'b1;
  end

  initial begin
    assert (STRATEGY == 1 || STRATEGY == 2) else $error("STRATEGY must be 1 or 2");
    assert (C_OUT % MUX_RATIO == 0) else $error("C_OUT must be a multiple of MUX_RATIO");
  end

endmodule
