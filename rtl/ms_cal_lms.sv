// ms_cal_lms -- LMS estimators of the mixed-signal calibration variant.
//
// Instead of a digital CE, this variant corrects the TI-ADC in the analog
// domain: a gain (PGA), a sampling-clock delay cell and an offset per
// interleave. The same backpropagated error e_hat drives three estimators
// (paper, mixed-signal section), with m = n mod M:
//
//     gamma_i,m <- gamma_i,m - mu_gamma * e_hat_i[n] * w_i[n]
//     tau_i,t   <- tau_i,t   - mu_tau   * e_hat_i[n] * (w_i[n+1] - w_i[n-1])
//     o_i,m     <- o_i,m     + mu_o     * e_hat_i[n]
//
// The gain and timing rules are the paper's (the timing one is the MMSE
// timing-recovery gradient). The offset sign is this design's: the analog
// offset is subtracted, so the descent direction is +e_hat (the paper writes
// a minus sign). In a hierarchical TI-ADC the sampling instant is set by the
// first rank only, so the delay cells are indexed t = m mod M_TAU, with
// M_TAU = M1 rank-1 switches (M_TAU = M for a flat TI-ADC).
//
// Output codes: gain = 1 + gain_code / 2^9; delay in steps of the delay cell
// (260 fs, clamped to +-192 steps = +-50 ps as on the test chip; a positive
// code samples later); offset in quarter LSBs, subtracted before the ADC.
// The code formats are this design's choice. Accumulators keep 16 extra
// fractional bits (each step is the gradient times 2^16 >> shift) and the delay accumulator is clamped to the cell's range.
// Timing: updates land the cycle after gs_valid.
module ms_cal_lms
  import ebp_pkg::*;
#(
  parameter int unsigned M     = 16,
  parameter int unsigned M_TAU = M,
  parameter int unsigned LG    = 7
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable,
  input  logic [4:0] mu_gain_shift,
  input  logic [4:0] mu_tau_shift,
  input  logic [4:0] mu_ofs_shift,
  input  logic [3:0] gear,
  input  logic       gs_valid,
  input  logic [((M > 1) ? $clog2(M) : 1)-1:0] gs_phase,
  input  eh_t        gs_ehat [NCH],
  input  w_t         gs_w    [NCH][LG+1],
  output logic signed [GAIN_CODE_W-1:0] gain_code [NCH][M],
  output logic signed [TAU_CODE_W-1:0]  tau_code  [NCH][M_TAU],
  output ofs_t                          ofs_code  [NCH][M]
);

  localparam int unsigned TW = (M_TAU > 1) ? $clog2(M_TAU) : 1;
  localparam logic signed [63:0] TAU_ACC_MAX = 64'(TAU_CODE_MAX) <<< ACC_XTRA;

  logic signed [ACC_W-1:0] gacc [NCH][M];
  logic signed [ACC_W-1:0] tacc [NCH][M_TAU];
  logic signed [ACC_W-1:0] oacc [NCH][M];

  logic [5:0]    sh_g, sh_t, sh_o;
  logic [TW-1:0] tph;
  assign sh_g = 6'(mu_gain_shift) + 6'(gear);
  assign sh_t = 6'(mu_tau_shift) + 6'(gear);
  assign sh_o = 6'(mu_ofs_shift) + 6'(gear);
  assign tph  = TW'(gs_phase % M_TAU);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCH; i++) begin
        for (int m = 0; m < M; m++) begin
          gacc[i][m] <= '0;
          oacc[i][m] <= '0;
        end
        for (int t = 0; t < M_TAU; t++) tacc[i][t] <= '0;
      end
    end else if (enable && gs_valid) begin
      for (int i = 0; i < NCH; i++) begin
        logic signed [63:0] dg, dt, dof, tn;
        dg  = rshift_rnd((64'(gs_ehat[i]) * 64'(gs_w[i][1])) <<< ACC_XTRA, sh_g);
        dt  = rshift_rnd((64'(gs_ehat[i]) * (64'(gs_w[i][0]) - 64'(gs_w[i][2]))) <<< ACC_XTRA, sh_t);
        dof = rshift_rnd(64'(gs_ehat[i]) <<< ACC_XTRA, sh_o);
        gacc[i][gs_phase] <= ACC_W'(sat(64'(gacc[i][gs_phase]) - dg, ACC_W));
        oacc[i][gs_phase] <= ACC_W'(sat(64'(oacc[i][gs_phase]) + dof, ACC_W));
        tn = 64'(tacc[i][tph]) - dt;
        if (tn > TAU_ACC_MAX)  tn = TAU_ACC_MAX;
        if (tn < -TAU_ACC_MAX) tn = -TAU_ACC_MAX;
        tacc[i][tph] <= ACC_W'(tn);
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NCH; i++) begin
      for (int m = 0; m < M; m++) begin
        gain_code[i][m] = GAIN_CODE_W'(sat(64'(gacc[i][m]) >>> ACC_XTRA, GAIN_CODE_W));
        ofs_code[i][m]  = ofs_t'(sat(64'(oacc[i][m]) >>> ACC_XTRA, OFS_W));
      end
      for (int t = 0; t < M_TAU; t++)
        tau_code[i][t] = TAU_CODE_W'(64'(tacc[i][t]) >>> ACC_XTRA);
    end
  end

endmodule
