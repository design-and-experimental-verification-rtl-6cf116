// tb_ebp_engine -- self-checking test of the serial backpropagation engine.
//
// The testbench plays the capture buffer: random CE inputs w and random
// symbol-rate errors (zero at odd addresses), served with one cycle of read
// latency. For every processed sample n = L_g-1 .. N-L_Gamma the reference
// computes e_hat_i[n] = round(sum_j sum_l Gamma[j][i][l] e_j[n+l] / 2^10)
// and the window w_i[n+1 .. n-L_g+1] directly from the arrays; each gradient
// sample the engine emits is compared with it, in order, with its phase
// n mod M. Also checked: the number of samples per block, the cycles per
// block ((K+2) per sample), blk_done, blocks_done and the gear-shift counter.
module tb_ebp_engine;
  import ebp_pkg::*;

  localparam int unsigned N   = 64;
  localparam int unsigned M   = 16;
  localparam int unsigned LG  = 7;
  localparam int unsigned LGM = 7;
  localparam int unsigned AW  = $clog2(N);
  localparam int unsigned MW  = $clog2(M);
  localparam int unsigned K   = (LG + 1 > LGM) ? LG + 1 : LGM;
  localparam int NBLK = 5;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  gm_t         gamma [NCH][NCH][LGM];
  logic [15:0] gear_period;
  logic [3:0]  gear_max, gear;
  logic        blk_ready, blk_done, gs_valid, busy;
  logic [AW-1:0] w_rd_addr, e_rd_addr;
  w_t          w_rd_data [NCH];
  u_t          e_rd_data [NCH];
  logic [MW-1:0] gs_phase;
  eh_t         gs_ehat [NCH];
  w_t          gs_w [NCH][LG+1];
  logic [31:0] blocks_done;

  ebp_engine #(.N(N), .M(M), .LG(LG), .LGM(LGM)) dut (.*);

  // Buffer model.
  w_t wb [NCH][N];
  u_t eb [NCH][N];
  always @(posedge clk) begin
    for (int i = 0; i < NCH; i++) begin
      w_rd_data[i] <= wb[i][w_rd_addr];
      e_rd_data[i] <= eb[i][e_rd_addr];
    end
  end

  function automatic longint satl(longint v, int w);
    longint hi = (64'sd1 <<< (w - 1)) - 1;
    longint lo = -(64'sd1 <<< (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  int nexp;            // next expected sample index
  int nseen;
  always @(posedge clk) begin
    if (rst_n && gs_valid) begin
      bit bad;
      bad = 0;
      nseen++;
      if (int'(gs_phase) != nexp % M) bad = 1;
      for (int i = 0; i < NCH; i++) begin
        longint acc;
        acc = 0;
        for (int j = 0; j < NCH; j++)
          for (int l = 0; l < LGM; l++)
            acc += longint'(gamma[j][i][l]) * longint'(eb[j][nexp + l]);
        if (longint'(gs_ehat[i]) != satl((acc + 512) >>> 10, EH_W)) bad = 1;
        for (int k = 0; k <= LG; k++)
          if (gs_w[i][k] != wb[i][nexp + 1 - k]) bad = 1;
      end
      checks++;
      if (bad) begin
        failures++;
        if (failures < 10) $display("FAIL: sample %0d ehat0=%0d", nexp, gs_ehat[0]);
      end
      nexp++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gear_period = 16'd2;
    gear_max    = 4'd1;
    blk_ready   = 1'b0;
    for (int j = 0; j < NCH; j++)
      for (int i = 0; i < NCH; i++)
        for (int l = 0; l < LGM; l++)
          gamma[j][i][l] = gm_t'($signed($urandom_range(0, 2047)) - 1024);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NBLK; b++) begin
      longint t0;
      for (int i = 0; i < NCH; i++)
        for (int a = 0; a < N; a++) begin
          wb[i][a] = w_t'($urandom);
          eb[i][a] = (a % 2 == 0) ? u_t'($urandom) : '0;
        end
      nexp  = LG - 1;
      nseen = 0;
      @(negedge clk);
      blk_ready = 1'b1;
      t0 = longint'(cyc);
      wait (blk_done);
      @(negedge clk);
      blk_ready = 1'b0;
      checks++;
      if (nseen != N - LGM - LG + 2) begin
        failures++;
        $display("FAIL: %0d samples in block, expected %0d", nseen, N - LGM - LG + 2);
      end
      checks++;
      if (longint'(cyc) - t0 != longint'((N - LGM - LG + 2) * (K + 2) + 2)) begin
        failures++;
        $display("FAIL: block took %0d cycles", longint'(cyc) - t0);
      end
      repeat (3) @(negedge clk);
      checks++;
      if (busy || blocks_done != 32'(b + 1)) begin
        failures++;
        $display("FAIL: busy=%0d blocks_done=%0d", busy, blocks_done);
      end
      checks++;
      if (gear != ((b + 1 >= 2) ? 4'd1 : 4'd0)) begin
        failures++;
        $display("FAIL: gear %0d after %0d blocks", gear, b + 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
