// ebp_engine -- serial error backpropagation over one captured block.
//
// The slicer error only exists after the receiver DSP, but the CE sits in
// front of it. Treating the DSP as the linear MIMO filter Gamma, the error
// is carried back to the CE output through the transposed (time-reversed)
// filter -- the backpropagation step of the paper:
//
//     e_hat_i[n] = sum_{j=0}^{3} sum_{l=0}^{L_Gamma-1} Gamma[j][i][l] * e_j[n+l]
//
// where e_j[n] is the zero-stuffed oversampled slicer error. For every
// sample n of the captured block the engine computes e_hat for all four
// components and emits one "gradient sample": the interleave phase n mod M,
// e_hat_i[n], and the CE input window w_i[n+1], w_i[n], ..., w_i[n-L_g+1].
// The LMS units (ce_lms, ms_cal_lms) turn it into coefficient updates.
//
// The engine is deliberately serial, as the paper suggests for this highly
// subsampled block: per sample it issues K = max(L_g+1, L_Gamma) reads of
// each buffer and does one tap l of the 4x4 backpropagation per cycle
// (16 multiplies), so a sample takes K+2 cycles. Samples n = L_g-1 ..
// N-L_Gamma are processed; the few at the block edges whose windows would
// leave the block are skipped (this design's choice).
//
// It also implements gear shifting (named in the paper, details this
// design's own): after every gear_period processed blocks the output `gear`
// rises by one, up to gear_max; the LMS units add it to their step-size
// shift, so the steps halve each time. gear_period = 0 keeps gear at 0.
//
// Interface: starts when blk_ready is high, pulses blk_done at the end.
// gs_valid is a one-cycle strobe.
module ebp_engine
  import ebp_pkg::*;
#(
  parameter int unsigned N   = 8192,
  parameter int unsigned M   = 16,
  parameter int unsigned LG  = 7,
  parameter int unsigned LGM = 7
) (
  input  logic        clk,
  input  logic        rst_n,
  input  gm_t         gamma [NCH][NCH][LGM],
  input  logic [15:0] gear_period,
  input  logic [3:0]  gear_max,
  input  logic        blk_ready,
  output logic        blk_done,
  output logic [$clog2(N)-1:0] w_rd_addr,
  input  w_t          w_rd_data [NCH],
  output logic [$clog2(N)-1:0] e_rd_addr,
  input  u_t          e_rd_data [NCH],
  output logic        gs_valid,
  output logic [((M > 1) ? $clog2(M) : 1)-1:0] gs_phase,
  output eh_t         gs_ehat [NCH],
  output w_t          gs_w    [NCH][LG+1],
  output logic [3:0]  gear,
  output logic        busy,
  output logic [31:0] blocks_done
);

  localparam int unsigned AW = $clog2(N);
  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned K  = (LG + 1 > LGM) ? LG + 1 : LGM;
  localparam int unsigned CW = $clog2(K + 1);
  localparam int unsigned WI = $clog2(LG + 1);              // w window index
  localparam int unsigned GI = (LGM > 1) ? $clog2(LGM) : 1;  // Gamma tap index
  localparam int unsigned N_FIRST = LG - 1;
  localparam int unsigned N_LAST  = N - LGM;

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_LAST, S_EMIT, S_DONE} state_e;
  state_e state;

  logic [AW-1:0] n;
  logic [CW-1:0] c;          // issue cycle
  logic          ret_v;      // read data returning this cycle
  logic [CW-1:0] ret_c;
  logic signed [47:0] acc [NCH];
  w_t            wwin [NCH][LG+1];
  logic [15:0]   gear_cnt;

  // Read addresses for issue cycle c.
  always_comb begin
    w_rd_addr = n + AW'(1) - AW'(c);
    e_rd_addr = n + AW'(c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      n           <= '0;
      c           <= '0;
      ret_v       <= 1'b0;
      ret_c       <= '0;
      blk_done    <= 1'b0;
      gs_valid    <= 1'b0;
      gs_phase    <= '0;
      gear        <= '0;
      gear_cnt    <= '0;
      blocks_done <= '0;
      for (int i = 0; i < NCH; i++) begin
        acc[i]     <= '0;
        gs_ehat[i] <= '0;
        for (int k = 0; k <= LG; k++) begin
          wwin[i][k] <= '0;
          gs_w[i][k] <= '0;
        end
      end
    end else begin
      blk_done <= 1'b0;
      gs_valid <= 1'b0;
      ret_v    <= 1'b0;

      // Returning read data: fill the w window, accumulate tap ret_c.
      if (ret_v) begin
        for (int i = 0; i < NCH; i++) begin
          logic signed [47:0] s;
          if (ret_c <= CW'(LG)) wwin[i][WI'(ret_c)] <= w_rd_data[i];
          s = '0;
          if (ret_c < CW'(LGM))
            for (int j = 0; j < NCH; j++)
              s = s + 48'(gamma[j][i][GI'(ret_c)]) * 48'(e_rd_data[j]);
          acc[i] <= acc[i] + s;
        end
      end

      case (state)
        S_IDLE: begin
          if (blk_ready && !blk_done) begin
            state <= S_RUN;
            n     <= AW'(N_FIRST);
            c     <= '0;
            for (int i = 0; i < NCH; i++) acc[i] <= '0;
          end
        end
        S_RUN: begin
          ret_v <= 1'b1;
          ret_c <= c;
          if (c == CW'(K - 1)) state <= S_LAST;
          else                 c     <= c + CW'(1);
        end
        S_LAST: state <= S_EMIT;   // last read data is absorbed this cycle
        S_EMIT: begin
          gs_valid <= 1'b1;
          gs_phase <= MW'(n % M);
          for (int i = 0; i < NCH; i++) begin
            gs_ehat[i] <= eh_t'(sat(rshift_rnd(64'(acc[i]), 6'(GM_FRAC)), EH_W));
            acc[i]     <= '0;
            for (int k = 0; k <= LG; k++) gs_w[i][k] <= wwin[i][k];
          end
          c <= '0;
          if (n == AW'(N_LAST)) state <= S_DONE;
          else begin
            n     <= n + AW'(1);
            state <= S_RUN;
          end
        end
        default: begin  // S_DONE
          blk_done    <= 1'b1;
          blocks_done <= blocks_done + 32'd1;
          state       <= S_IDLE;
          if (gear_period != '0) begin
            if (gear_cnt + 16'd1 >= gear_period) begin
              gear_cnt <= '0;
              if (gear < gear_max) gear <= gear + 4'd1;
            end else begin
              gear_cnt <= gear_cnt + 16'd1;
            end
          end
        end
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
