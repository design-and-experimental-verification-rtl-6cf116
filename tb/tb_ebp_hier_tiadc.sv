// tb_ebp_hier_tiadc -- mixed-signal calibration of a highly interleaved,
// two-rank TI-ADC: M_1 = 16 first-rank track-and-hold switches, each feeding
// M_2 = 8 sub-ADCs, M = 128 interleaves in all, with 64-QAM signals.
//
// In such a converter the sampling instant is set by the first-rank switch
// alone, so the model gives each of the 16 switches its own timing error
// (up to +-5 % of Ts) while gain (+-6 %) and offset (+-3 LSB) errors belong
// to each of the 128 sub-ADCs. The design is built with M = 128 gain and
// offset codes and M_TAU = 16 delay cells; everything else is at its default
// (L_g = 7, N = 8192). The channel model -- four PAM streams over-sampled by
// two, a polarisation rotation undone by Gamma, 8-bit rounding, the design's
// codes applied in the analog domain -- is the one of the full-size bench.
//
// Checked: the slicer MSE falls at least fivefold, no symbol errors remain at
// the end, and for every even interleave (the ones this Gamma observes) the
// gain and offset codes cancel the sub-ADC errors and the delay codes cancel
// the switch timing errors. Counted (each must occur): blocks processed,
// blocks skipped, gear steps, CE bypass.
module tb_ebp_hier_tiadc;
  import ebp_pkg::*;

  localparam int unsigned M   = 128;   // M_1 x M_2 sub-ADCs
  localparam int unsigned M_TAU = 16;  // first-rank switches
  localparam int unsigned LG  = 7;
  localparam int unsigned LGM = 7;
  localparam int unsigned LD  = (LG + 1) / 2;
  localparam int CD = 2;            // Gamma tap that carries the rotation
  localparam int SYMBUF = 16384;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  cal_mode_e   cfg_mode;
  logic        cfg_cal_en, cfg_qam256;
  logic [3:0]  cfg_a_shift;
  logic [15:0] cfg_db;
  logic [4:0]  cfg_mu_g, cfg_mu_o, cfg_mu_gain, cfg_mu_tau, cfg_mu_ms_o;
  logic [15:0] cfg_gear_period;
  logic [3:0]  cfg_gear_max;
  gm_t         cfg_gamma [NCH][NCH][LGM];
  logic        adc_valid;
  adc_t        adc_data [NCH];
  logic        sym_valid;
  idx_t        sym_idx;
  logic signed [4:0] sym [NCH];
  u_t          slicer_err [NCH];
  logic signed [GAIN_CODE_W-1:0] gain_code [NCH][M];
  logic signed [TAU_CODE_W-1:0]  tau_code  [NCH][M_TAU];
  ofs_t        ofs_code [NCH][M];
  logic [31:0] blocks_captured, blocks_done, blocks_skipped, ce_updates;
  logic        cal_busy;
  logic [3:0]  gear;

  ebp_calib_top #(.M(M), .M_TAU(M_TAU)) dut (.*);

  // ---------------------------------------------------------------- model
  real    cs = 0.8, sn = 0.6;
  real    gain_err [NCH][M];
  real    ofs_err  [NCH][M];
  real    tim_err  [NCH][M];
  real    scale;                 // ADC LSBs per PAM unit
  int     npam;                  // PAM levels
  int     a [NCH][SYMBUF];       // symbols, odd integers
  longint n = 0;                 // ADC sample index
  bit     mixed;

  function automatic int rand_sym(int L);
    return 2 * $urandom_range(0, L - 1) - (L - 1);
  endfunction

  // Transmitted (pre-rotation) waveform of component j at sample time n.
  function automatic real s_tx(int j, longint t);
    longint k = t >>> 1;
    if (t % 2 == 0) return real'(a[j][k % SYMBUF]);
    return 0.5 * (real'(a[j][k % SYMBUF]) + real'(a[j][(k + 1) % SYMBUF]));
  endfunction

  // Received (rotated) waveform at fractional time t + d, |d| < 1.
  function automatic real s_rx(int i, longint t, real d);
    real v0, v1;
    int p = (i < 2) ? i + 2 : i - 2;
    real r0, r1;
    longint t1 = (d >= 0.0) ? t + 1 : t - 1;
    real dd = (d >= 0.0) ? d : -d;
    r0 = (i < 2) ? cs * s_tx(i, t) - sn * s_tx(p, t) : sn * s_tx(p, t) + cs * s_tx(i, t);
    r1 = (i < 2) ? cs * s_tx(i, t1) - sn * s_tx(p, t1) : sn * s_tx(p, t1) + cs * s_tx(i, t1);
    v0 = r0;
    v1 = r1;
    return v0 + dd * (v1 - v0);
  endfunction

  function automatic adc_t quant(real v);
    longint q = longint'($floor(v + 0.5));
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return adc_t'(q);
  endfunction

  // ADC sample generation (automatic task: fresh locals for every sample).
  task automatic adc_sample();
    int m = int'(n % M);
    if (n % 2 == 0)
      for (int j = 0; j < NCH; j++) a[j][((n >>> 1) + 1) % SYMBUF] = rand_sym(npam);
    for (int i = 0; i < NCH; i++) begin
      real g, d, o;
      g = 1.0 + gain_err[i][m];
      d = tim_err[i][m];
      o = ofs_err[i][m];
      if (mixed) begin
        g = g * (1.0 + real'(gain_code[i][m]) / 512.0);
        d = d + real'(tau_code[i][m % M_TAU]) / 256.0;
        o = o - real'(ofs_code[i][m]) / 4.0;
      end
      adc_data[i] = quant(scale * g * s_rx(i, n, d) + o);
    end
    n++;
  endtask

  int gap = 0;
  always @(negedge clk) begin
    if (!rst_n) begin
      adc_valid = 1'b0;
    end else begin
      gap = (gap + 1) % 97;
      adc_valid = (gap != 0);
      if (adc_valid) adc_sample();
    end
  end

  // ------------------------------------------------------------- monitors
  longint nd = 0;             // decisions seen
  real    mse_acc = 0.0;
  longint mse_cnt = 0;
  longint sym_err = 0;
  int     sym_lat;            // sample delay from ADC to slicer input
  int     cnt_gear = 0, cnt_bypass = 0, cnt_q64 = 0, cnt_q256 = 0, cnt_capt = 0, cnt_busy = 0;
  logic [31:0] prev_blocks = 0;
  logic [3:0]  prev_gear = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (gear != prev_gear && gear != 0) cnt_gear++;
      prev_gear <= gear;
      if (blocks_done != prev_blocks) cnt_capt++;
      if (cal_busy) cnt_busy++;
      prev_blocks <= blocks_done;
      if (adc_valid && dut.g_ce[0].u_ce.bypass) cnt_bypass++;
    end
    if (rst_n && sym_valid) begin
      longint k;
      k = (longint'(sym_idx) - longint'(sym_lat)) >>> 1;
      nd++;
      if (cfg_qam256) cnt_q256++; else cnt_q64++;
      if (longint'(sym_idx) >= sym_lat + 4) begin
        for (int j = 0; j < NCH; j++) begin
          mse_acc += real'(slicer_err[j]) * real'(slicer_err[j]);
          if (2 * int'(sym[j]) + 1 != a[j][k % SYMBUF]) sym_err++;
        end
        mse_cnt += NCH;
      end
    end
  end

  task automatic window(int nsym, output real mse, output longint errs);
    mse_acc = 0.0;
    mse_cnt = 0;
    sym_err = 0;
    while (mse_cnt < longint'(nsym) * NCH) @(posedge clk);
    mse  = mse_acc / real'(mse_cnt);
    errs = sym_err;
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic wait_blocks(int nb);
    while (blocks_done < 32'(nb)) @(posedge clk);
  endtask

  // -------------------------------------------------------------- watchdog
  initial begin
    repeat (12000000) @(posedge clk);
    failures++;
    $display("watchdog: blocks_done=%0d", blocks_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- sequence
  initial begin
    real    mse0, mse1;
    longint e0, e1;
    // DSP model: rotation by the transposed matrix at tap CD.
    for (int j = 0; j < NCH; j++)
      for (int i = 0; i < NCH; i++)
        for (int l = 0; l < LGM; l++) cfg_gamma[j][i][l] = '0;
    for (int j = 0; j < 2; j++) begin
      cfg_gamma[j][j][CD]     = gm_t'(819);    //  0.8
      cfg_gamma[j][j+2][CD]   = gm_t'(614);    //  0.6
      cfg_gamma[j+2][j][CD]   = gm_t'(-614);
      cfg_gamma[j+2][j+2][CD] = gm_t'(819);
    end
    for (int j = 0; j < NCH; j++)
      for (int k = 0; k < SYMBUF; k++) a[j][k] = 1;

    mixed           = 1;
    npam            = 8;
    scale           = 8.0;            // u = 32 per PAM unit
    cfg_mode        = CAL_MIXED;
    cfg_cal_en      = 1'b1;
    cfg_qam256      = 1'b0;
    cfg_a_shift     = 4'd5;
    cfg_db          = 16'd2;
    cfg_mu_g        = 5'd10;
    cfg_mu_o        = 5'd10;
    cfg_mu_gain     = 5'd13;          // 64 updates per sub-ADC and block
    cfg_mu_tau      = 5'd15;          // 512 updates per switch and block
    cfg_mu_ms_o     = 5'd8;
    cfg_gear_period = 16'd8;
    cfg_gear_max    = 4'd2;
    sym_lat         = CD;
    for (int i = 0; i < NCH; i++) begin
      for (int m = 0; m < M; m++) begin
        gain_err[i][m] = 0.12 * ($urandom_range(0, 1000) / 1000.0) - 0.06;
        ofs_err[i][m]  = 6.0 * ($urandom_range(0, 1000) / 1000.0) - 3.0;
      end
      for (int t = 0; t < M_TAU; t++) begin
        real d;
        d = 0.10 * ($urandom_range(0, 1000) / 1000.0) - 0.05;
        for (int m = t; m < M; m += M_TAU) tim_err[i][m] = d;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    window(3000, mse0, e0);
    wait_blocks(32);
    window(3000, mse1, e1);
    $display("hierarchical: MSE %0.2f -> %0.2f, symbol errors %0d -> %0d, blocks %0d, skipped %0d",
             mse0, mse1, e0, e1, blocks_done, blocks_skipped);
    chk(mse1 < mse0 / 5.0, "MSE did not fall fivefold");
    chk(e1 == 0, "symbol errors after calibration");
    begin
      int bad_g, bad_t, bad_o;
      bad_g = 0;
      bad_t = 0;
      bad_o = 0;
      for (int i = 0; i < NCH; i++) begin
        for (int m = 0; m < M; m += 2) begin
          real gt, ot;
          gt = (1.0 + gain_err[i][m]) * (1.0 + real'(gain_code[i][m]) / 512.0);
          ot = ofs_err[i][m] - real'(ofs_code[i][m]) / 4.0;
          if (gt > 1.01 || gt < 0.99) bad_g++;
          if (ot > 0.75 || ot < -0.75) bad_o++;
        end
        for (int t = 0; t < M_TAU; t += 2) begin
          real tt;
          tt = tim_err[i][t] * 256.0 + real'(tau_code[i][t]);
          if (tt > 2.5 || tt < -2.5) bad_t++;
        end
      end
      chk(bad_g == 0, $sformatf("%0d gain codes off", bad_g));
      chk(bad_t == 0, $sformatf("%0d delay codes off", bad_t));
      chk(bad_o == 0, $sformatf("%0d offset codes off", bad_o));
    end

    $display("mechanisms: blocks %0d, skipped %0d, gear steps %0d, bypass samples %0d, 64-QAM %0d, 256-QAM %0d",
             cnt_capt, blocks_skipped, cnt_gear, cnt_bypass, cnt_q64, cnt_q256);
    chk(cnt_capt > 0, "no block processed");
    chk(blocks_captured >= blocks_done && blocks_captured > 0, "captured-block count");
    chk(cnt_busy > 0, "engine never busy");
    chk(blocks_skipped > 0, "no block skipped");
    chk(cnt_gear > 0, "no gear shift");
    chk(cnt_bypass > 0, "CE never bypassed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
