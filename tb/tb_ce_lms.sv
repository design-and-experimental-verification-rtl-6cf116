// tb_ce_lms -- self-checking test of the CE coefficient and offset LMS.
//
// Random gradient samples (phase, e_hat, w window) are applied with random
// step-size shifts and gear. A reference model in this file keeps its own
// 32-bit accumulators and applies
//   g[i][m][l] -= round(e_hat_i * w_i[n-l] * 2^16 / 2^(mu_g+gear))   (not i=0,m=0)
//   o[i][(m-l_d) mod M] += round(e_hat_i * 2^16 / 2^(mu_o+gear))
// with saturation. After every update, all outputs (4 x M x L_g
// coefficients and 4 x M offsets) are compared one cycle later. Also
// checked: reset to the delay line delta(l - l_d), the frozen reference set
// g[0][0] = delta(l - l_d), no update while enable is low, update counter.
module tb_ce_lms;
  import ebp_pkg::*;

  localparam int unsigned M  = 16;
  localparam int unsigned LG = 7;
  localparam int unsigned LD = (LG + 1) / 2;
  localparam int unsigned MW = $clog2(M);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        enable, gs_valid;
  logic [4:0]  mu_g_shift, mu_o_shift;
  logic [3:0]  gear;
  logic [MW-1:0] gs_phase;
  eh_t         gs_ehat [NCH];
  w_t          gs_w [NCH][LG+1];
  g_t          g [NCH][M][LG];
  ofs_t        ofs [NCH][M];
  logic [31:0] updates;

  ce_lms #(.M(M), .LG(LG)) dut (.*);

  longint rg [NCH][M][LG];
  longint ro [NCH][M];

  function automatic longint satl(longint v, int w);
    longint hi = (64'sd1 <<< (w - 1)) - 1;
    longint lo = -(64'sd1 <<< (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction
  function automatic longint rnd(longint v, int s);
    return (s == 0) ? v : ((v + (64'sd1 <<< (s - 1))) >>> s);
  endfunction

  task automatic compare(string what);
    bit bad;
    bad = 0;
    for (int i = 0; i < NCH; i++)
      for (int m = 0; m < M; m++) begin
        if (longint'(ofs[i][m]) != satl(ro[i][m] >>> 16, OFS_W)) bad = 1;
        for (int l = 0; l < LG; l++)
          if (longint'(g[i][m][l]) != (rg[i][m][l] >>> 16)) bad = 1;
      end
    for (int l = 0; l < LG; l++)
      if (g[0][0][l] != ((l == LD) ? g_t'(16384) : g_t'(0))) bad = 1;
    checks++;
    if (bad) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
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
    mu_g_shift = 5'd8;
    mu_o_shift = 5'd8;
    gear = '0;
    gs_phase = '0;
    for (int i = 0; i < NCH; i++) begin
      gs_ehat[i] = '0;
      for (int k = 0; k <= LG; k++) gs_w[i][k] = '0;
      for (int m = 0; m < M; m++) begin
        ro[i][m] = 0;
        for (int l = 0; l < LG; l++) rg[i][m][l] = (l == LD) ? (64'sd1 <<< 30) : 0;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    compare("reset values");
    for (int t = 0; t < 3000; t++) begin
      int m, mo, sg, so;
      @(negedge clk);
      enable     = (t % 50) != 7;
      mu_g_shift = 5'($urandom_range(8, 24));
      mu_o_shift = 5'($urandom_range(2, 12));
      gear       = 4'($urandom_range(0, 3));
      gs_valid   = 1'b1;
      gs_phase   = MW'($urandom_range(0, M - 1));
      m  = int'(gs_phase);
      mo = (m + M - LD) % M;
      sg = int'(mu_g_shift) + int'(gear);
      so = int'(mu_o_shift) + int'(gear);
      for (int i = 0; i < NCH; i++) begin
        gs_ehat[i] = eh_t'($signed($urandom_range(0, 4000)) - 2000);
        for (int k = 0; k <= LG; k++) gs_w[i][k] = w_t'($urandom);
        if (enable) begin
          if (!(i == 0 && m == 0))
            for (int l = 0; l < LG; l++)
              rg[i][m][l] = satl(rg[i][m][l] - rnd((longint'(gs_ehat[i]) * longint'(gs_w[i][l+1])) <<< 16, sg), ACC_W);
          ro[i][mo] = satl(ro[i][mo] + rnd(longint'(gs_ehat[i]) <<< 16, so), ACC_W);
        end
      end
      @(negedge clk);
      gs_valid = 1'b0;
      compare($sformatf("after update %0d", t));
    end
    checks++;
    if (updates != 32'(3000 - 60)) begin
      failures++;
      $display("FAIL: update count %0d", updates);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
