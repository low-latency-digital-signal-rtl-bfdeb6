// feedback_dsp: low-latency signal processor that turns a digitised
// dispersive qubit-readout signal into state-dependent feedback triggers.
//
// Data path (one sample per 10 ns clock at 100 MS/s), as published:
//   ADC word -> z^-1 input register -> fs/4 digital mixer (registered)
//   -> moving-average filter per branch (registered) -> offset subtraction
//   and power-of-two scaling (no registers) -> state discrimination, whose
//   fb/fb2 outputs are registered.
// The processing latency is three clock cycles (30 ns) from the input
// register to the feedback outputs. The trigger that marks the start of a
// readout pulse passes z^-6, z^-1 and z^-1 so that it reaches the state
// discrimination together with the samples it belongs to: the six-stage
// delay matches the external ADC's latency (four conversion cycles plus
// one transfer cycle) and the input register. The state discrimination
// delays the trigger edge by the host-set readout time d, tests the signs
// of I~ and Q~ through two lookup tables and issues fb and fb2; the
// same fbTime marker makes the histogram module count the (I~, Q~) bin in
// an external ZBT RAM. All settings come from the host register bank.
//
// Like the published full design, the host can swap in the flexible
// versions of the first two stages: an oscillator-and-multiplier mixer with
// adjustable frequency and phase instead of the quarter-rate multiplexer
// mixer, and a 40-tap FIR filter with loadable coefficients instead of the
// moving average. Both flexible blocks are also one pipeline stage deep, so
// the trigger alignment and the latency below hold for every selection.
//
// Own choices are listed in each sub-block; at this level: the histogram
// memory host port and the settings bus are plain synchronous ports,
// writing the moving-average length or the path selection re-zeroes the
// filters, and the FIR filter's coefficients are shared by both branches.
//
// Timing from the pins: a trigger edge on tr_i raises fb_o/fb2_o (for one
// cycle) 9 + d clock edges later; the sample on adc_i reaches the decision
// 3 clock edges later, so the trigger should lead the matching ADC word by
// the ADC's 5-cycle latency, as it does when both come from the same
// analog instant.
module feedback_dsp
  import fbdsp_pkg::*;
#(
  parameter int unsigned L_MAX      = 16,   // longest moving-average window
  parameter int unsigned N_TAPS     = 40,   // general FIR filter length
  parameter int unsigned TR_ALIGN   = 6,    // trigger delay z^-6
  parameter int unsigned HIST_AW    = 21,   // histogram RAM address bits
  parameter int unsigned HIST_DW    = 16,   // histogram count word
  parameter int unsigned RAM_RD_LAT = 2,    // ZBT read latency in cycles
  parameter int unsigned HIST_FIFO  = 32    // pending histogram increments
) (
  input  logic                    clk,
  input  logic                    rst,
  // converter and trigger inputs
  input  logic signed [ADC_W-1:0] adc_i,
  input  logic                    tr_i,
  // feedback outputs
  output logic                    fb_o,
  output logic                    fb2_o,
  output logic                    fbtime_o,
  output logic [1:0]              xy_o,      // sign bits {x, y} of I~, Q~
  // host settings bus
  input  logic                    cfg_wr_en_i,
  input  logic [3:0]              cfg_wr_addr_i,
  input  logic [31:0]             cfg_wr_data_i,
  input  logic [3:0]              cfg_rd_addr_i,
  output logic [31:0]             cfg_rd_data_o,
  // host access to the histogram memory
  input  logic                    hmem_en_i,
  input  logic                    hmem_we_i,
  input  logic [HIST_AW-1:0]      hmem_addr_i,
  input  logic [HIST_DW-1:0]      hmem_wdata_i,
  output logic                    hmem_ready_o,
  output logic [HIST_DW-1:0]      hmem_rdata_o,
  output logic                    hmem_rvalid_o,
  // external ZBT RAM
  output logic                    ram_en_o,
  output logic                    ram_we_o,
  output logic [HIST_AW-1:0]      ram_addr_o,
  output logic [HIST_DW-1:0]      ram_wdata_o,
  input  logic [HIST_DW-1:0]      ram_rdata_i
);

  settings_t cfg;
  logic      ma_clr;
  logic [15:0] drop_cnt;
  logic      hist_busy;
  logic                     coef_we;
  logic [TAP_W-1:0]         coef_addr;
  logic signed [COEF_W-1:0] coef;

  host_regs u_regs (
    .clk, .rst,
    .wr_en_i   (cfg_wr_en_i),
    .wr_addr_i (cfg_wr_addr_i),
    .wr_data_i (cfg_wr_data_i),
    .rd_addr_i (cfg_rd_addr_i),
    .rd_data_o (cfg_rd_data_o),
    .drop_cnt_i (drop_cnt),
    .hist_busy_i (hist_busy),
    .cfg_o     (cfg),
    .ma_clr_o  (ma_clr),
    .coef_we_o (coef_we),
    .coef_addr_o (coef_addr),
    .coef_o    (coef)
  );

  // ---- signal path --------------------------------------------------------
  logic signed [ADC_W-1:0] adc_q;
  logic signed [MIX_W-1:0] sm_re, sm_im, q4_re, q4_im, nco_re, nco_im;
  logic signed [IQ_W-1:0]  i_ma, q_ma, i_fir, q_fir, i_f, q_f, i_t, q_t;

  delay_line #(.WIDTH(ADC_W), .DEPTH(1)) u_adc_reg (
    .clk, .rst, .d_i(adc_i), .q_o(adc_q));

  fs4_mixer u_mixer (
    .clk, .rst, .s_adc_i(adc_q), .re_o(q4_re), .im_o(q4_im));

  nco_mixer u_nco_mixer (
    .clk, .rst, .s_adc_i(adc_q), .ftw_i(cfg.nco_ftw), .phase_i(cfg.nco_phase),
    .re_o(nco_re), .im_o(nco_im));

  assign sm_re = cfg.mix_sel ? nco_re : q4_re;
  assign sm_im = cfg.mix_sel ? nco_im : q4_im;

  moving_average #(.IN_W(MIX_W), .OUT_W(IQ_W), .L_MAX(L_MAX)) u_ma_i (
    .clk, .rst, .clr_i(ma_clr), .len_i($clog2(L_MAX+1)'(cfg.ma_len)),
    .x_i(sm_re), .y_o(i_ma));

  moving_average #(.IN_W(MIX_W), .OUT_W(IQ_W), .L_MAX(L_MAX)) u_ma_q (
    .clk, .rst, .clr_i(ma_clr), .len_i($clog2(L_MAX+1)'(cfg.ma_len)),
    .x_i(sm_im), .y_o(q_ma));

  fir_filter #(.IN_W(MIX_W), .OUT_W(IQ_W), .N_TAPS(N_TAPS)) u_fir_i (
    .clk, .rst, .clr_i(ma_clr), .coef_we_i(coef_we), .coef_addr_i(coef_addr),
    .coef_i(coef), .x_i(sm_re), .y_o(i_fir));

  fir_filter #(.IN_W(MIX_W), .OUT_W(IQ_W), .N_TAPS(N_TAPS)) u_fir_q (
    .clk, .rst, .clr_i(ma_clr), .coef_we_i(coef_we), .coef_addr_i(coef_addr),
    .coef_i(coef), .x_i(sm_im), .y_o(q_fir));

  assign i_f = cfg.fir_sel ? i_fir : i_ma;
  assign q_f = cfg.fir_sel ? q_fir : q_ma;

  offset_scale u_pre_i (.x_i(i_f), .c_i(cfg.c_i), .shift_i(cfg.shift_i), .y_o(i_t));
  offset_scale u_pre_q (.x_i(q_f), .c_i(cfg.c_q), .shift_i(cfg.shift_q), .y_o(q_t));

  // ---- trigger path -------------------------------------------------------
  logic tr_a, tr_b, tr_c;

  delay_line #(.WIDTH(1), .DEPTH(TR_ALIGN)) u_tr_align (
    .clk, .rst, .d_i(tr_i), .q_o(tr_a));
  delay_line #(.WIDTH(1), .DEPTH(1)) u_tr_mix (
    .clk, .rst, .d_i(tr_a), .q_o(tr_b));
  delay_line #(.WIDTH(1), .DEPTH(1)) u_tr_ma (
    .clk, .rst, .d_i(tr_b), .q_o(tr_c));

  // ---- decision and histogram --------------------------------------------
  state_discrimination u_disc (
    .clk, .rst,
    .tr_i     (tr_c),
    .i_i      (i_t),
    .q_i      (q_t),
    .delay_i  (cfg.fb_delay),
    .lut1_i   (cfg.lut1),
    .lut2_i   (cfg.lut2),
    .fbtime_o (fbtime_o),
    .fb_o, .fb2_o,
    .xy_o
  );

  histogram_module #(
    .AW(HIST_AW), .DW(HIST_DW), .RD_LAT(RAM_RD_LAT), .FIFO_D(HIST_FIFO)
  ) u_hist (
    .clk, .rst,
    .i_i      (i_t),
    .q_i      (q_t),
    .fbtime_i (fbtime_o),
    .mode_i   (cfg.hist_mode),
    .en_i     (cfg.hist_en),
    .tlen_i   (cfg.hist_tlen),
    .drop_cnt_o (drop_cnt),
    .busy_o   (hist_busy),
    .host_en_i    (hmem_en_i),
    .host_we_i    (hmem_we_i),
    .host_addr_i  (hmem_addr_i),
    .host_wdata_i (hmem_wdata_i),
    .host_ready_o (hmem_ready_o),
    .host_rdata_o (hmem_rdata_o),
    .host_rvalid_o(hmem_rvalid_o),
    .ram_en_o, .ram_we_o, .ram_addr_o, .ram_wdata_o, .ram_rdata_i
  );

endmodule
