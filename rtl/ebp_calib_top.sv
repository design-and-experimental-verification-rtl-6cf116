// ebp_calib_top -- digital back end of a dual-polarisation coherent receiver
// with error-backpropagation (EBP) background calibration of the TI-ADCs.
//
// Data path (one sample per clock per component, four components):
//   TI-ADC samples -> ce_filter x4 (offset removal + M-periodic FIR)
//   -> rx_dsp_mimo (4x4 MIMO T/2 model of the receiver DSP, decimate by 2)
//   -> pam_slicer (decisions and slicer errors at the symbol rate).
// Calibration path (background, block decimated):
//   ebp_capture stores one block of N CE inputs and slicer errors out of
//   every D_B; ebp_engine backpropagates the errors through the DSP
//   coefficients; ce_lms (all-digital variant) or ms_cal_lms (mixed-signal
//   variant) turns the result into new CE coefficients/offsets or into gain,
//   delay-cell and offset codes for the analog TI-ADC.
//
// cfg_mode selects the variant. In CAL_MIXED the CE is bypassed and only the
// analog codes adapt; the codes are outputs of this module, because the
// delay cells, PGAs and offset DACs are inside the (analog) TI-ADC.
// All samples carry an index tag (adc sample count) through the pipeline,
// which aligns slicer errors with CE inputs in the capture buffer. The
// overall structure follows the paper's block diagrams; the streaming
// (non-parallel) form, the interfaces and all word widths are this design's.
//
// Two internal results are left unused on purpose: the slicer's decided
// amplitudes (the symbols leave as level indices) and the capture's block
// base index (the engine addresses the buffer relative to it).
//
// Latency: ADC sample to x 2 cycles, to u 4 cycles, to the slicer output 5
// cycles (even samples only).
module ebp_calib_top
  import ebp_pkg::*;
#(
  parameter int unsigned M     = 16,     // TI-ADC interleaves
  parameter int unsigned M_TAU = M,      // delay cells (rank-1 switches)
  parameter int unsigned LG    = 7,      // CE taps
  parameter int unsigned LGM   = 7,      // DSP model taps
  parameter int unsigned N     = 8192    // EBP block size
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  cal_mode_e   cfg_mode,
  input  logic        cfg_cal_en,
  input  logic        cfg_qam256,
  input  logic [3:0]  cfg_a_shift,
  input  logic [15:0] cfg_db,
  input  logic [4:0]  cfg_mu_g,
  input  logic [4:0]  cfg_mu_o,
  input  logic [4:0]  cfg_mu_gain,
  input  logic [4:0]  cfg_mu_tau,
  input  logic [4:0]  cfg_mu_ms_o,
  input  logic [15:0] cfg_gear_period,
  input  logic [3:0]  cfg_gear_max,
  input  gm_t         cfg_gamma [NCH][NCH][LGM],
  // TI-ADC samples
  input  logic        adc_valid,
  input  adc_t        adc_data [NCH],
  // decisions
  output logic        sym_valid,
  output idx_t        sym_idx,
  output logic signed [4:0] sym [NCH],
  output u_t          slicer_err [NCH],
  // analog calibration codes (mixed-signal variant)
  output logic signed [GAIN_CODE_W-1:0] gain_code [NCH][M],
  output logic signed [TAU_CODE_W-1:0]  tau_code  [NCH][M_TAU],
  output ofs_t                          ofs_code  [NCH][M],
  // status
  output logic [31:0] blocks_captured,
  output logic [31:0] blocks_done,
  output logic [31:0] blocks_skipped,
  output logic [31:0] ce_updates,
  output logic        cal_busy,
  output logic [3:0]  gear
);

  localparam int unsigned AW = $clog2(N);
  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1;

  logic digital, ms;
  assign digital = cfg_cal_en && (cfg_mode == CAL_DIGITAL);
  assign ms      = cfg_cal_en && (cfg_mode == CAL_MIXED);

  // Sample index.
  idx_t adc_idx;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         adc_idx <= '0;
    else if (adc_valid) adc_idx <= adc_idx + idx_t'(1);
  end

  // Compensation equalizer.
  g_t   ce_g   [NCH][M][LG];
  ofs_t ce_ofs [NCH][M];
  logic w_valid [NCH];
  idx_t w_idx   [NCH];
  w_t   w_s     [NCH];
  logic x_valid [NCH];
  idx_t x_idx   [NCH];
  x_t   x_s     [NCH];

  for (genvar i = 0; i < NCH; i++) begin : g_ce
    ce_filter #(.M(M), .LG(LG)) u_ce (
      .clk, .rst_n,
      .bypass  (cfg_mode == CAL_MIXED),
      .in_valid(adc_valid),
      .in_idx  (adc_idx),
      .in_y    (adc_data[i]),
      .g       (ce_g[i]),
      .ofs     (ce_ofs[i]),
      .w_valid (w_valid[i]),
      .w_idx   (w_idx[i]),
      .w_out   (w_s[i]),
      .x_valid (x_valid[i]),
      .x_idx   (x_idx[i]),
      .x_out   (x_s[i])
    );
  end

  // Receiver DSP model.
  logic u_valid;
  idx_t u_idx;
  u_t   u_s [NCH];
  rx_dsp_mimo #(.LGM(LGM)) u_dsp (
    .clk, .rst_n,
    .gamma  (cfg_gamma),
    .x_valid(x_valid[0]),
    .x_idx  (x_idx[0]),
    .x_in   (x_s),
    .u_valid(u_valid),
    .u_idx  (u_idx),
    .u_out  (u_s)
  );

  // Slicers.
  u_t ahat [NCH];
  pam_slicer u_slicer (
    .clk, .rst_n,
    .qam256  (cfg_qam256),
    .a_shift (cfg_a_shift),
    .u_valid (u_valid),
    .u_idx   (u_idx),
    .u_in    (u_s),
    .e_valid (sym_valid),
    .e_idx   (sym_idx),
    .e_out   (slicer_err),
    .ahat_out(ahat),
    .sym_out (sym)
  );

  // Block capture.
  logic          blk_ready, blk_done, blk_captured, blk_skipped;
  idx_t          blk_base;
  logic [AW-1:0] w_rd_addr, e_rd_addr;
  w_t            w_rd_data [NCH];
  u_t            e_rd_data [NCH];
  ebp_capture #(.N(N)) u_cap (
    .clk, .rst_n,
    .enable      (cfg_cal_en),
    .db          (cfg_db),
    .w_valid     (w_valid[0]),
    .w_idx       (w_idx[0]),
    .w_in        (w_s),
    .e_valid     (sym_valid),
    .e_idx       (sym_idx),
    .e_in        (slicer_err),
    .blk_ready   (blk_ready),
    .blk_base    (blk_base),
    .blk_done    (blk_done),
    .blk_captured(blk_captured),
    .blk_skipped (blk_skipped),
    .w_rd_addr   (w_rd_addr),
    .w_rd_data   (w_rd_data),
    .e_rd_addr   (e_rd_addr),
    .e_rd_data   (e_rd_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      blocks_skipped  <= '0;
      blocks_captured <= '0;
    end else begin
      if (blk_skipped)  blocks_skipped  <= blocks_skipped + 32'd1;
      if (blk_captured) blocks_captured <= blocks_captured + 32'd1;
    end
  end

  // EBP engine.
  logic          gs_valid;
  logic [MW-1:0] gs_phase;
  eh_t           gs_ehat [NCH];
  w_t            gs_w    [NCH][LG+1];
  ebp_engine #(.N(N), .M(M), .LG(LG), .LGM(LGM)) u_eng (
    .clk, .rst_n,
    .gamma      (cfg_gamma),
    .gear_period(cfg_gear_period),
    .gear_max   (cfg_gear_max),
    .blk_ready  (blk_ready),
    .blk_done   (blk_done),
    .w_rd_addr  (w_rd_addr),
    .w_rd_data  (w_rd_data),
    .e_rd_addr  (e_rd_addr),
    .e_rd_data  (e_rd_data),
    .gs_valid   (gs_valid),
    .gs_phase   (gs_phase),
    .gs_ehat    (gs_ehat),
    .gs_w       (gs_w),
    .gear       (gear),
    .busy       (cal_busy),
    .blocks_done(blocks_done)
  );

  // All-digital variant: CE adaptation.
  ce_lms #(.M(M), .LG(LG)) u_ce_lms (
    .clk, .rst_n,
    .enable    (digital),
    .mu_g_shift(cfg_mu_g),
    .mu_o_shift(cfg_mu_o),
    .gear      (gear),
    .gs_valid  (gs_valid),
    .gs_phase  (gs_phase),
    .gs_ehat   (gs_ehat),
    .gs_w      (gs_w),
    .g         (ce_g),
    .ofs       (ce_ofs),
    .updates   (ce_updates)
  );

  // Mixed-signal variant: analog gain, delay and offset codes.
  ms_cal_lms #(.M(M), .M_TAU(M_TAU), .LG(LG)) u_ms_lms (
    .clk, .rst_n,
    .enable       (ms),
    .mu_gain_shift(cfg_mu_gain),
    .mu_tau_shift (cfg_mu_tau),
    .mu_ofs_shift (cfg_mu_ms_o),
    .gear         (gear),
    .gs_valid     (gs_valid),
    .gs_phase     (gs_phase),
    .gs_ehat      (gs_ehat),
    .gs_w         (gs_w),
    .gain_code    (gain_code),
    .tau_code     (tau_code),
    .ofs_code     (ofs_code)
  );

endmodule
