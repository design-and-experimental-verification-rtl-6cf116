// rx_dsp_mimo -- model of the receiver DSP: a 4x4 real MIMO T/2
// fractionally spaced FIR followed by decimation to the symbol rate.
//
//     u_j[n] = sum_{i=0}^{3} sum_{l=0}^{L_Gamma-1} Gamma[j][i][l] * x_i[n-l]
//
// and only even n (one sample per symbol, T/Ts = 2) are passed to the
// slicers. This is the linear model the paper uses for the whole receiver
// DSP chain (bulk dispersion equaliser, MIMO FFE, timing and carrier
// recovery); those blocks themselves are not built. The same coefficients
// Gamma are what the EBP engine uses to send the slicer error back to the CE
// outputs, so they are exported unchanged from a configuration input. The
// paper allows Gamma to vary with time; here it is static while calibrating,
// and L_Gamma = 7 is this design's choice (the paper gives no value).
//
// Interface: x_valid/x_idx/x_in carry one oversampled sample per lane.
// Timing: x enters a delay line on the cycle after x_valid; the decimated
// output u_valid/u_idx/u_out is registered one cycle later, for even x_idx
// only. Scaling: u = (sum of products) >> GM_FRAC, rounded and saturated.
module rx_dsp_mimo
  import ebp_pkg::*;
#(
  parameter int unsigned LGM = 7   // L_Gamma, taps per MIMO branch
) (
  input  logic clk,
  input  logic rst_n,
  input  gm_t  gamma [NCH][NCH][LGM],   // [output j][input i][tap l]
  input  logic x_valid,
  input  idx_t x_idx,
  input  x_t   x_in  [NCH],
  output logic u_valid,
  output idx_t u_idx,
  output u_t   u_out [NCH]
);

  x_t   xdl [NCH][LGM];
  logic dl_valid;
  idx_t dl_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dl_valid <= 1'b0;
      dl_idx   <= '0;
      for (int i = 0; i < NCH; i++)
        for (int l = 0; l < LGM; l++) xdl[i][l] <= '0;
    end else begin
      dl_valid <= x_valid;
      if (x_valid) begin
        dl_idx <= x_idx;
        for (int i = 0; i < NCH; i++) begin
          xdl[i][0] <= x_in[i];
          for (int l = 1; l < LGM; l++) xdl[i][l] <= xdl[i][l-1];
        end
      end
    end
  end

  u_t u_new [NCH];
  always_comb begin
    for (int j = 0; j < NCH; j++) begin
      logic signed [63:0] acc;
      acc = '0;
      for (int i = 0; i < NCH; i++)
        for (int l = 0; l < LGM; l++)
          acc = acc + 64'(gamma[j][i][l]) * 64'(xdl[i][l]);
      u_new[j] = u_t'(sat(rshift_rnd(acc, 6'(GM_FRAC)), U_W));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u_valid <= 1'b0;
      u_idx   <= '0;
      for (int j = 0; j < NCH; j++) u_out[j] <= '0;
    end else begin
      u_valid <= dl_valid && !dl_idx[0];
      if (dl_valid && !dl_idx[0]) begin
        u_idx <= dl_idx;
        for (int j = 0; j < NCH; j++) u_out[j] <= u_new[j];
      end
    end
  end

endmodule
