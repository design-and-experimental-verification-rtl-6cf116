// ce_lms -- LMS adaptation of the Compensation Equalizer (all-digital
// calibration variant).
//
// Holds the 4 x M x L_g CE coefficients g_i,m[l] and the 4 x M digital offset
// estimates o_hat_i,m, and updates them from each gradient sample of the EBP
// engine (phase m = n mod M, backpropagated error e_hat_i[n], CE inputs
// w_i[n-l]):
//
//     g_i,m[l]      <- g_i,m[l] - mu_g * e_hat_i[n] * w_i[n-l]     (paper)
//     o_hat_i,m'    <- o_hat_i,m' + mu_o * e_hat_i[n],  m' = (n - l_d) mod M
//
// The coefficient rule is the paper's stochastic-gradient update with the
// backpropagated error. For the offset the paper writes a minus sign; since
// the CE subtracts the estimate (w = y - o_hat), descending the gradient needs
// the plus sign used here, and the error is paired with the interleave whose
// sample passes the reference tap l_d (both this design's reading).
//
// Adaptation constraint (paper): to keep the CE from fighting the adaptive
// DSP, the set of component 0, phase 0 is frozen at a pure delay,
// g_0,0[l] = delta(l - l_d), l_d = (L_g+1)/2. All other sets start from the
// same delay at reset.
//
// Step sizes are powers of two, mu = 2^-(shift + gear), with `gear` from the
// engine's gear shifting; with e_hat and w in quarter LSBs the coefficient
// step is mu_g = 2^-(14 + shift + gear) per unit product. Accumulators carry
// 16 more fractional bits than the outputs. Timing: an update is applied on the cycle after gs_valid; the
// outputs are the accumulators' upper bits and feed the CE directly.
module ce_lms
  import ebp_pkg::*;
#(
  parameter int unsigned M  = 16,
  parameter int unsigned LG = 7,
  parameter int unsigned LD = (LG + 1) / 2   // reference tap l_d
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable,
  input  logic [4:0] mu_g_shift,
  input  logic [4:0] mu_o_shift,
  input  logic [3:0] gear,
  input  logic       gs_valid,
  input  logic [((M > 1) ? $clog2(M) : 1)-1:0] gs_phase,
  input  eh_t        gs_ehat [NCH],
  input  w_t         gs_w    [NCH][LG+1],
  output g_t         g       [NCH][M][LG],
  output ofs_t       ofs     [NCH][M],
  output logic [31:0] updates
);

  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1;
  localparam logic signed [ACC_W-1:0] ONE = ACC_W'(1) <<< (G_FRAC + ACC_XTRA);

  logic signed [ACC_W-1:0] gacc [NCH][M][LG];
  logic signed [ACC_W-1:0] oacc [NCH][M];

  logic [5:0]    sh_g, sh_o;
  logic [MW-1:0] ph_o;
  assign sh_g = 6'(mu_g_shift) + 6'(gear);
  assign sh_o = 6'(mu_o_shift) + 6'(gear);
  assign ph_o = MW'((32'(gs_phase) + M - (LD % M)) % M);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      updates <= '0;
      for (int i = 0; i < NCH; i++)
        for (int m = 0; m < M; m++) begin
          oacc[i][m] <= '0;
          for (int l = 0; l < LG; l++)
            gacc[i][m][l] <= (l == LD) ? ONE : '0;
        end
    end else if (enable && gs_valid) begin
      updates <= updates + 32'd1;
      for (int i = 0; i < NCH; i++) begin
        if (!(i == 0 && gs_phase == '0)) begin
          for (int l = 0; l < LG; l++) begin
            logic signed [63:0] d;
            d = rshift_rnd((64'(gs_ehat[i]) * 64'(gs_w[i][l+1])) <<< ACC_XTRA, sh_g);
            gacc[i][gs_phase][l] <= ACC_W'(sat(64'(gacc[i][gs_phase][l]) - d, ACC_W));
          end
        end
        oacc[i][ph_o] <= ACC_W'(sat(64'(oacc[i][ph_o]) +
                                    rshift_rnd(64'(gs_ehat[i]) <<< ACC_XTRA, sh_o), ACC_W));
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NCH; i++)
      for (int m = 0; m < M; m++) begin
        ofs[i][m] = ofs_t'(sat(64'(oacc[i][m]) >>> ACC_XTRA, OFS_W));
        for (int l = 0; l < LG; l++)
          g[i][m][l] = g_t'(gacc[i][m][l] >>> ACC_XTRA);
      end
  end

endmodule
