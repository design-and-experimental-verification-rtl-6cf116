// pam_slicer -- symbol-rate decision and slicer error for the four real
// signal components.
//
// Each component of a square QAM symbol is a PAM symbol: 8 levels for
// 64-QAM and 16 levels for 256-QAM (qam256 selects). The levels are the odd
// multiples of A = 2^a_shift (in u units): +-A, +-3A, ... The decision is
//     k     = clamp(floor(u / 2A), -L/2, L/2-1)
//     a_hat = (2k + 1) * A
//     e     = u - a_hat
// The slicer and the error definition e_k = u_k - a_hat_k follow the paper;
// the power-of-two level spacing (the slicer input is assumed to be scaled
// by the DSP's gain control) is this design's choice.
//
// Interface: u_valid/u_idx/u_in at the symbol rate; outputs registered one
// cycle later with the same index tag. sym_out is the level number k.
module pam_slicer
  import ebp_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       qam256,
  input  logic [3:0] a_shift,
  input  logic       u_valid,
  input  idx_t       u_idx,
  input  u_t         u_in    [NCH],
  output logic       e_valid,
  output idx_t       e_idx,
  output u_t         e_out   [NCH],
  output u_t         ahat_out[NCH],
  output logic signed [4:0] sym_out [NCH]
);

  u_t e_new [NCH];
  u_t a_new [NCH];
  logic signed [4:0] k_new [NCH];

  always_comb begin
    for (int j = 0; j < NCH; j++) begin
      logic signed [U_W-1:0] k;
      logic signed [U_W-1:0] kmax, kmin;
      logic signed [U_W+1:0] a;
      kmax = qam256 ? U_W'(7) : U_W'(3);
      kmin = qam256 ? -U_W'(8) : -U_W'(4);
      k = u_in[j] >>> (a_shift + 4'd1);
      if (k > kmax) k = kmax;
      if (k < kmin) k = kmin;
      a = ((U_W+2)'(k) <<< 1) + (U_W+2)'(1);
      a = a <<< a_shift;
      a_new[j] = u_t'(a);
      e_new[j] = u_t'(sat(64'(u_in[j]) - 64'(a), U_W));
      k_new[j] = 5'(k);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_valid <= 1'b0;
      e_idx   <= '0;
      for (int j = 0; j < NCH; j++) begin
        e_out[j]    <= '0;
        ahat_out[j] <= '0;
        sym_out[j]  <= '0;
      end
    end else begin
      e_valid <= u_valid;
      if (u_valid) begin
        e_idx <= u_idx;
        for (int j = 0; j < NCH; j++) begin
          e_out[j]    <= e_new[j];
          ahat_out[j] <= a_new[j];
          sym_out[j]  <= k_new[j];
        end
      end
    end
  end

endmodule
