// tb_ebp_capture -- self-checking test of the block-decimation capture
// buffer.
//
// A tagged w stream (with random gaps) and a symbol-rate e stream that lags
// it by a few cycles are generated from known functions of the sample index.
// A small engine model in this file waits for blk_ready, reads the whole
// buffer through both read ports and compares every word with the functions:
// w at every address, e at even addresses and 0 at odd ones (zero-stuffed
// error). It then keeps the buffer for a while before blk_done, so that
// block slots are skipped. Also checked: block bases are multiples of N*D_B,
// capture and skip counts, and that blk_ready drops after blk_done.
module tb_ebp_capture;
  import ebp_pkg::*;

  localparam int unsigned N  = 64;
  localparam int unsigned AW = $clog2(N);
  localparam int unsigned DB = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        enable;
  logic [15:0] db;
  logic        w_valid, e_valid;
  idx_t        w_idx, e_idx;
  w_t          w_in [NCH];
  u_t          e_in [NCH];
  logic        blk_ready, blk_done, blk_captured, blk_skipped;
  idx_t        blk_base;
  logic [AW-1:0] w_rd_addr, e_rd_addr;
  w_t          w_rd_data [NCH];
  u_t          e_rd_data [NCH];

  ebp_capture #(.N(N)) dut (.*);

  function automatic w_t fw(longint idx, int i);
    return w_t'(((idx * 7 + i * 13) % 4096) - 2048);
  endfunction
  function automatic u_t fe(longint idx, int j);
    return u_t'(((idx * 11 + j * 5) % 60000) - 30000);
  endfunction

  // Stream generator: w now, e (even indices only) 5 cycles later.
  localparam int LAT = 5;
  logic   pv [LAT];
  longint pidx [LAT];
  longint nidx = 0;
  int     n_capt = 0, n_skip = 0;
  always @(posedge clk) begin
    if (blk_captured) n_capt++;
    if (blk_skipped)  n_skip++;
  end

  always @(negedge clk) begin
    if (rst_n) begin
      w_valid = ($urandom_range(0, 5) != 0);
      if (w_valid) begin
        w_idx = idx_t'(nidx);
        for (int i = 0; i < NCH; i++) w_in[i] = fw(nidx, i);
      end
      e_valid = pv[LAT-1] && (pidx[LAT-1] % 2 == 0);
      e_idx   = idx_t'(pidx[LAT-1]);
      for (int j = 0; j < NCH; j++) e_in[j] = fe(pidx[LAT-1], j);
      for (int k = LAT - 1; k > 0; k--) begin
        pv[k]   = pv[k-1];
        pidx[k] = pidx[k-1];
      end
      pv[0]   = w_valid;
      pidx[0] = nidx;
      if (w_valid) nidx++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enable    = 1'b1;
    db        = 16'(DB);
    w_valid   = 1'b0;
    e_valid   = 1'b0;
    w_idx     = '0;
    e_idx     = '0;
    blk_done  = 1'b0;
    w_rd_addr = '0;
    e_rd_addr = '0;
    for (int k = 0; k < LAT; k++) begin
      pv[k]   = 1'b0;
      pidx[k] = 0;
    end
    for (int i = 0; i < NCH; i++) begin
      w_in[i] = '0;
      e_in[i] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 6; b++) begin
      longint base;
      bit bad;
      wait (blk_ready);
      @(negedge clk);
      base = longint'(blk_base);
      checks++;
      if (base % (N * DB) != 0) begin
        failures++;
        $display("FAIL: block base %0d not a multiple of N*D_B", base);
      end
      bad = 0;
      for (int a = 0; a < N; a++) begin
        w_rd_addr = AW'(a);
        e_rd_addr = AW'(a);
        @(negedge clk);
        for (int i = 0; i < NCH; i++) begin
          if (w_rd_data[i] != fw(base + a, i)) bad = 1;
          if (a % 2 == 0 && e_rd_data[i] != fe(base + a, i)) bad = 1;
          if (a % 2 == 1 && e_rd_data[i] != '0) bad = 1;
        end
      end
      checks++;
      if (bad) begin
        failures++;
        $display("FAIL: buffer contents of block at %0d", base);
      end
      // Keep the buffer busy for a few block periods on odd blocks.
      repeat ((b % 2) ? 4 * N * DB : 10) @(negedge clk);
      blk_done = 1'b1;
      @(negedge clk);
      blk_done = 1'b0;
      @(negedge clk);
      checks++;
      if (blk_ready) begin
        failures++;
        $display("FAIL: blk_ready still high after blk_done");
      end
    end
    checks++;
    if (n_capt < 6 || n_skip == 0) begin
      failures++;
      $display("FAIL: captured %0d, skipped %0d", n_capt, n_skip);
    end
    $display("captured %0d skipped %0d", n_capt, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
