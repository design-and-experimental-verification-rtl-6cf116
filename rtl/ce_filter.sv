// ce_filter -- Compensation Equalizer (CE) for one signal component.
//
// The CE sits right after the TI-ADC. It first removes the M-periodic DC
// offset estimate of the interleave that took the sample,
//     w[n] = y[n] - o_hat[n mod M],
// and then runs an M-periodic time-varying FIR with L_g taps,
//     x[n] = sum_{l=0}^{L_g-1} g[n mod M][l] * w[n-l],
// so that every interleave phase has its own coefficient set. Both the
// offset subtraction and the time-varying FIR follow the paper; coefficients
// and offsets are inputs and are adapted elsewhere (ce_lms).
//
// In the mixed-signal calibration variant the CE is switched off: with
// bypass = 1 the offset is not subtracted and x[n] = w[n] with no delay
// (the paper only says the CE is disabled; a zero-delay bypass is this
// design's choice).
//
// Interface: one sample per in_valid, tagged with its sample index in_idx;
// the interleave phase is in_idx mod M (M must be a power of two so that the
// phase stays continuous when the index wraps). Timing: w is registered one
// cycle after the input, x one cycle after w (2 cycles input to x). The tags
// travel with the samples. The streaming form takes one sample per clock; the
// parallel form of the paper (P = q*M lanes with fixed coefficient
// positions) is not built.
module ce_filter
  import ebp_pkg::*;
#(
  parameter int unsigned M  = 16,  // TI-ADC interleaves
  parameter int unsigned LG = 7    // CE taps
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  bypass,
  input  logic  in_valid,
  input  idx_t  in_idx,
  input  adc_t  in_y,
  input  g_t    g   [M][LG],
  input  ofs_t  ofs [M],
  output logic  w_valid,
  output idx_t  w_idx,
  output w_t    w_out,
  output logic  x_valid,
  output idx_t  x_idx,
  output x_t    x_out
);

  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1;

  w_t wdl [LG];                       // wdl[l] = w[n-l], n = w_idx

  logic [MW-1:0] in_ph, w_ph;
  assign in_ph = MW'(in_idx % M);
  assign w_ph  = MW'(w_idx % M);

  // Stage 1: offset removal and delay line.
  w_t w_new;
  always_comb begin
    logic signed [63:0] v;
    v = 64'(in_y) <<< W_FRAC;
    if (!bypass) v = v - 64'(ofs[in_ph]);
    w_new = w_t'(sat(v, W_W));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_valid <= 1'b0;
      w_idx   <= '0;
      for (int l = 0; l < LG; l++) wdl[l] <= '0;
    end else begin
      w_valid <= in_valid;
      if (in_valid) begin
        w_idx  <= in_idx;
        wdl[0] <= w_new;
        for (int l = 1; l < LG; l++) wdl[l] <= wdl[l-1];
      end
    end
  end
  assign w_out = wdl[0];

  // Stage 2: time-varying FIR, coefficient set chosen by the output phase.
  x_t x_new;
  always_comb begin
    logic signed [63:0] acc;
    acc = '0;
    for (int l = 0; l < LG; l++)
      acc = acc + 64'(g[w_ph][l]) * 64'(wdl[l]);
    if (bypass) x_new = x_t'(sat(64'(wdl[0]), X_W));
    else        x_new = x_t'(sat(rshift_rnd(acc, 6'(G_FRAC)), X_W));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_valid <= 1'b0;
      x_idx   <= '0;
      x_out   <= '0;
    end else begin
      x_valid <= w_valid;
      if (w_valid) begin
        x_idx <= w_idx;
        x_out <= x_new;
      end
    end
  end

endmodule
