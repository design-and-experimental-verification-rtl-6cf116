// tb_rx_dsp_mimo -- self-checking test of the 4x4 MIMO DSP model.
//
// Random coefficients Gamma[j][i][l] and random four-lane input samples
// with gaps. The reference keeps its own per-lane history and computes
// u_j = sat(round(sum_i sum_l Gamma[j][i][l] x_i[n-l] / 2^10)) for every
// input; only even sample indices must come out (decimation by T/Ts = 2),
// two cycles after the input. Values, tags, latency and the number of
// outputs are checked.
module tb_rx_dsp_mimo;
  import ebp_pkg::*;

  localparam int unsigned LGM = 7;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  gm_t  gamma [NCH][NCH][LGM];
  logic x_valid, u_valid;
  idx_t x_idx, u_idx;
  x_t   x_in [NCH];
  u_t   u_out [NCH];

  rx_dsp_mimo #(.LGM(LGM)) dut (.*);

  longint xh [NCH][LGM];
  typedef struct { longint idx; longint u[NCH]; longint t; } exp_t;
  exp_t q [$];
  int n_even = 0, n_out = 0;

  function automatic longint satl(longint v, int w);
    longint hi = (64'sd1 <<< (w - 1)) - 1;
    longint lo = -(64'sd1 <<< (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  always @(posedge clk) begin
    if (rst_n && u_valid) begin
      exp_t e;
      n_out++;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected u");
      end else begin
        bit bad;
        e = q.pop_front();
        bad = (longint'(u_idx) != e.idx) || (cyc - e.t != 2);
        for (int j = 0; j < NCH; j++) if (longint'(u_out[j]) != e.u[j]) bad = 1;
        if (bad) begin
          failures++;
          if (failures < 10)
            $display("FAIL idx=%0d u0=%0d exp %0d lat %0d", u_idx, u_out[0], e.u[0], cyc - e.t);
        end
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x_valid = 1'b0;
    x_idx   = '0;
    for (int i = 0; i < NCH; i++) begin
      x_in[i] = '0;
      for (int l = 0; l < LGM; l++) xh[i][l] = 0;
    end
    for (int j = 0; j < NCH; j++)
      for (int i = 0; i < NCH; i++)
        for (int l = 0; l < LGM; l++)
          gamma[j][i][l] = gm_t'($signed($urandom_range(0, 2047)) - 1024);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 4000; s++) begin
      @(negedge clk);
      if ($urandom_range(0, 4) == 0) begin
        x_valid = 1'b0;
      end else begin
        exp_t e;
        x_valid = 1'b1;
        x_idx   = x_idx + 1;
        for (int i = 0; i < NCH; i++) begin
          x_in[i] = x_t'($urandom);
          for (int l = LGM - 1; l > 0; l--) xh[i][l] = xh[i][l-1];
          xh[i][0] = longint'(x_in[i]);
        end
        if (!x_idx[0]) begin
          n_even++;
          e.idx = longint'(x_idx);
          e.t   = longint'(cyc);
          for (int j = 0; j < NCH; j++) begin
            longint acc;
            acc = 0;
            for (int i = 0; i < NCH; i++)
              for (int l = 0; l < LGM; l++) acc += longint'(gamma[j][i][l]) * xh[i][l];
            e.u[j] = satl((acc + 512) >>> 10, U_W);
          end
          q.push_back(e);
        end
      end
    end
    @(negedge clk);
    x_valid = 1'b0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_out != n_even || q.size() != 0) begin
      failures++;
      $display("FAIL: %0d outputs for %0d even inputs", n_out, n_even);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
