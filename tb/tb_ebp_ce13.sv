// tb_ebp_ce13 -- all-digital calibration with a 13-tap compensation
// equaliser (L_g = 13, l_d = 7) on a 16-way TI-ADC with 64-QAM signals.
//
// Besides per-interleave gain (+-10 %) and offset (+-3 LSB) errors, every
// interleave here also has a sampling-time error of up to +-4 % of Ts, which
// no analog knob corrects in this mode: the CE has to interpolate it away
// with its taps. The design is built with LG = 13; everything else is at its
// default (M = 16, L_Gamma = 7, N = 8192). The channel model -- four PAM
// streams over-sampled by two with linear interpolation, a polarisation
// rotation undone by Gamma, 8-bit rounding -- is the one of the full-size
// bench, except that Gamma holds the rotation at tap 1: with l_d = 7 the CE
// delays by an odd number of samples, and the DSP model restores an even
// total delay so that decisions fall on symbol instants (a real receiver's
// timing recovery would do this).
//
// Checked: the slicer MSE falls at least tenfold and ends near the
// quantisation floor, no symbol errors remain at the end, the reference set
// (component 0, phase 0) stays the pure delay delta(l - 7) and the offset
// estimates of the even phases match the offsets. Counted (each
// must occur): blocks processed, blocks skipped, gear steps, CE updates.
module tb_ebp_ce13;
  import ebp_pkg::*;

  localparam int unsigned M   = 16;
  localparam int unsigned LG  = 13;
  localparam int unsigned LGM = 7;
  localparam int unsigned LD  = (LG + 1) / 2;
  localparam int CD = 1;            // Gamma tap with the rotation: CD + l_d even
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
  logic signed [TAU_CODE_W-1:0]  tau_code  [NCH][M];
  ofs_t        ofs_code [NCH][M];
  logic [31:0] blocks_captured, blocks_done, blocks_skipped, ce_updates;
  logic        cal_busy;
  logic [3:0]  gear;

  ebp_calib_top #(.LG(LG)) dut (.*);

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
        d = d + real'(tau_code[i][m]) / 256.0;
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

    // ---------------- phase 1: all-digital, 64-QAM
    mixed           = 0;
    npam            = 8;
    scale           = 8.0;            // u = 32 per PAM unit
    cfg_mode        = CAL_DIGITAL;
    cfg_cal_en      = 1'b1;
    cfg_qam256      = 1'b0;
    cfg_a_shift     = 4'd5;
    cfg_db          = 16'd2;
    cfg_mu_g        = 5'd10;
    cfg_mu_o        = 5'd10;
    cfg_mu_gain     = 5'd15;
    cfg_mu_tau      = 5'd14;
    cfg_mu_ms_o     = 5'd10;
    cfg_gear_period = 16'd8;
    cfg_gear_max    = 4'd2;
    sym_lat         = CD + LD;
    for (int i = 0; i < NCH; i++)
      for (int m = 0; m < M; m++) begin
        gain_err[i][m] = 0.2 * ($urandom_range(0, 1000) / 1000.0) - 0.1;
        ofs_err[i][m]  = 6.0 * ($urandom_range(0, 1000) / 1000.0) - 3.0;
        tim_err[i][m]  = 0.08 * ($urandom_range(0, 1000) / 1000.0) - 0.04;
      end
    gain_err[0][0] = 0.0;     // reference interleave of the frozen CE set
    ofs_err[0][0]  = 0.0;
    tim_err[0][0]  = 0.0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    window(3000, mse0, e0);
    wait_blocks(24);
    window(3000, mse1, e1);
    $display("13-tap CE: MSE %0.2f -> %0.2f, symbol errors %0d -> %0d, blocks %0d, skipped %0d",
             mse0, mse1, e0, e1, blocks_done, blocks_skipped);
    chk(mse1 < mse0 / 10.0, "13-tap CE: MSE did not fall tenfold");
    chk(e1 == 0, "digital: symbol errors after calibration");
    chk(mse1 < 3.0, "13-tap CE: MSE not near the quantisation floor");
    chk(ce_updates > 32'd0, "digital: no CE update");
    begin
      int bad_o;
      bad_o = 0;
      for (int i = 0; i < NCH; i++)
        for (int m = 0; m < M; m += 2) begin
          real om;
          om = real'(dut.ce_ofs[i][m]) / 4.0;
          if (om - ofs_err[i][m] > 0.75 || om - ofs_err[i][m] < -0.75) bad_o++;
        end
      chk(bad_o == 0, $sformatf("digital: %0d offset estimates off", bad_o));
      for (int l = 0; l < LG; l++)
        chk(dut.ce_g[0][0][l] == ((l == LD) ? g_t'(16384) : g_t'(0)), "digital: reference set moved");
    end

    $display("mechanisms: blocks %0d, skipped %0d, gear steps %0d, bypass samples %0d, 64-QAM %0d, 256-QAM %0d",
             cnt_capt, blocks_skipped, cnt_gear, cnt_bypass, cnt_q64, cnt_q256);
    chk(cnt_capt > 0, "no block processed");
    chk(blocks_captured >= blocks_done && blocks_captured > 0, "captured-block count");
    chk(cnt_busy > 0, "engine never busy");
    chk(blocks_skipped > 0, "no block skipped");
    chk(cnt_gear > 0, "no gear shift");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
