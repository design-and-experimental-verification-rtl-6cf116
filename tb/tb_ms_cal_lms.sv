// tb_ms_cal_lms -- self-checking test of the mixed-signal calibration LMS.
//
// Random gradient samples drive the gain, delay and offset estimators. The
// reference model in this file applies, with its own accumulators,
//   gain[i][m]      -= round(e_hat * w[n] * 2^16 / 2^(mu+gear))
//   tau[i][m mod T] -= round(e_hat * (w[n+1] - w[n-1]) * 2^16 / 2^(mu+gear)),
//                      clamped to +-192 delay steps
//   ofs[i][m]       += round(e_hat * 2^16 / 2^(mu+gear))
// and all output codes are compared one cycle after each update. The test
// uses M = 16 interleaves with M_TAU = 4 delay cells (a two-rank TI-ADC),
// and large errors at the end drive the delay codes into their clamp.
module tb_ms_cal_lms;
  import ebp_pkg::*;

  localparam int unsigned M     = 16;
  localparam int unsigned M_TAU = 4;
  localparam int unsigned LG    = 7;
  localparam int unsigned MW    = $clog2(M);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        enable, gs_valid;
  logic [4:0]  mu_gain_shift, mu_tau_shift, mu_ofs_shift;
  logic [3:0]  gear;
  logic [MW-1:0] gs_phase;
  eh_t         gs_ehat [NCH];
  w_t          gs_w [NCH][LG+1];
  logic signed [GAIN_CODE_W-1:0] gain_code [NCH][M];
  logic signed [TAU_CODE_W-1:0]  tau_code  [NCH][M_TAU];
  ofs_t                          ofs_code  [NCH][M];

  ms_cal_lms #(.M(M), .M_TAU(M_TAU), .LG(LG)) dut (.*);

  longint rgn [NCH][M];
  longint rtau [NCH][M_TAU];
  longint rof [NCH][M];
  int     n_clamped = 0;

  function automatic longint satl(longint v, int w);
    longint hi = (64'sd1 <<< (w - 1)) - 1;
    longint lo = -(64'sd1 <<< (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction
  function automatic longint rnd(longint v, int s);
    return (s == 0) ? v : ((v + (64'sd1 <<< (s - 1))) >>> s);
  endfunction

  task automatic compare(int t);
    bit bad;
    bad = 0;
    for (int i = 0; i < NCH; i++) begin
      for (int m = 0; m < M; m++) begin
        if (longint'(gain_code[i][m]) != satl(rgn[i][m] >>> 16, GAIN_CODE_W)) bad = 1;
        if (longint'(ofs_code[i][m]) != satl(rof[i][m] >>> 16, OFS_W)) bad = 1;
      end
      for (int k = 0; k < M_TAU; k++)
        if (longint'(tau_code[i][k]) != (rtau[i][k] >>> 16)) bad = 1;
    end
    checks++;
    if (bad) begin
      failures++;
      if (failures < 10) $display("FAIL after update %0d: tau0=%0d exp %0d", t, tau_code[0][0], rtau[0][0] >>> 16);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enable = 1'b1;
    gs_valid = 1'b0;
    gear = '0;
    gs_phase = '0;
    mu_gain_shift = 5'd6;
    mu_tau_shift  = 5'd6;
    mu_ofs_shift  = 5'd6;
    for (int i = 0; i < NCH; i++) begin
      gs_ehat[i] = '0;
      for (int k = 0; k <= LG; k++) gs_w[i][k] = '0;
      for (int m = 0; m < M; m++) begin
        rgn[i][m] = 0;
        rof[i][m] = 0;
      end
      for (int k = 0; k < M_TAU; k++) rtau[i][k] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      int m, tp, sg, st, so;
      @(negedge clk);
      mu_gain_shift = 5'($urandom_range(12, 24));
      mu_tau_shift  = (t > 2500) ? 5'd8 : 5'($urandom_range(14, 24));
      mu_ofs_shift  = 5'($urandom_range(4, 12));
      gear          = 4'($urandom_range(0, 2));
      gs_valid      = 1'b1;
      gs_phase      = MW'($urandom_range(0, M - 1));
      m  = int'(gs_phase);
      tp = m % M_TAU;
      sg = int'(mu_gain_shift) + int'(gear);
      st = int'(mu_tau_shift) + int'(gear);
      so = int'(mu_ofs_shift) + int'(gear);
      for (int i = 0; i < NCH; i++) begin
        longint tn;
        gs_ehat[i] = (t > 2500) ? eh_t'(60000) : eh_t'($signed($urandom_range(0, 4000)) - 2000);
        for (int k = 0; k <= LG; k++) gs_w[i][k] = w_t'($urandom);
        if (t > 2500) begin
          gs_w[i][0] = w_t'(2000);
          gs_w[i][2] = w_t'(-2000);
        end
        rgn[i][m] = satl(rgn[i][m] - rnd((longint'(gs_ehat[i]) * longint'(gs_w[i][1])) <<< 16, sg), ACC_W);
        rof[i][m] = satl(rof[i][m] + rnd(longint'(gs_ehat[i]) <<< 16, so), ACC_W);
        tn = rtau[i][tp] - rnd((longint'(gs_ehat[i]) * (longint'(gs_w[i][0]) - longint'(gs_w[i][2]))) <<< 16, st);
        if (tn > (64'sd192 <<< 16)) tn = 64'sd192 <<< 16;
        if (tn < -(64'sd192 <<< 16)) begin
          tn = -(64'sd192 <<< 16);
          n_clamped++;
        end
        rtau[i][tp] = tn;
      end
      @(negedge clk);
      gs_valid = 1'b0;
      compare(t);
    end
    checks++;
    if (n_clamped == 0 || tau_code[0][0] != -9'sd192) begin
      failures++;
      $display("FAIL: delay clamp not reached (%0d)", tau_code[0][0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
