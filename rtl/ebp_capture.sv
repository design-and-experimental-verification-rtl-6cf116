// ebp_capture -- block decimation buffer between the full-rate datapath and
// the serial EBP engine.
//
// The adaptation does not need every sample. The sample stream is cut into
// blocks of N consecutive samples; one block out of every D_B is stored and
// handed to the EBP engine, the others are ignored (block decimation, as in
// the paper). Two things are stored for the chosen block, for all four
// components:
//   * the CE input samples w[n0 .. n0+N-1],
//   * the symbol-rate slicer errors e_k of the same block.
// The errors are kept only at even n; the read port returns 0 for odd
// addresses, which is the zero-stuffed oversampled error e[n] of the paper
// (the "up by 2" box in front of the EBP).
//
// A block whose slot comes while the buffer still belongs to the engine is
// skipped and reported on blk_skipped (the engine then sets the real
// decimation). Blocks start at sample indices that are multiples of N, so
// with N a multiple of M the interleave phase of buffer address a is a mod M.
//
// Interface: w and e arrive as index-tagged streams; an e sample is written
// when its tag falls inside the block, so the pipeline latency between them
// does not matter. blk_ready stays high until the engine pulses blk_done.
// Read ports have one cycle of latency. The choice of which block is
// captured, the skip rule and the handshake are this design's own.
module ebp_capture
  import ebp_pkg::*;
#(
  parameter int unsigned N = 8192   // samples per block
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic [15:0] db,           // block decimation factor D_B (>= 1)
  input  logic        w_valid,
  input  idx_t        w_idx,
  input  w_t          w_in [NCH],
  input  logic        e_valid,
  input  idx_t        e_idx,
  input  u_t          e_in [NCH],
  output logic        blk_ready,
  output idx_t        blk_base,
  input  logic        blk_done,
  output logic        blk_captured,
  output logic        blk_skipped,
  input  logic [$clog2(N)-1:0] w_rd_addr,
  output w_t          w_rd_data [NCH],
  input  logic [$clog2(N)-1:0] e_rd_addr,
  output u_t          e_rd_data [NCH]
);

  localparam int unsigned AW = $clog2(N);

  typedef enum logic [1:0] {S_IDLE, S_CAPT, S_FULL} state_e;
  state_e state;

  w_t wbuf [NCH][N];
  u_t ebuf [NCH][N/2];

  logic [15:0] blk_cnt;
  logic        w_done, e_done;
  idx_t        w_off, e_off;
  logic        boundary, slot;

  assign w_off    = w_idx - blk_base;
  assign e_off    = e_idx - blk_base;
  assign boundary = w_valid && (w_idx[AW-1:0] == '0);
  assign slot     = boundary && (blk_cnt == '0);

  // Control.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      blk_cnt      <= '0;
      blk_base     <= '0;
      w_done       <= 1'b0;
      e_done       <= 1'b0;
      blk_captured <= 1'b0;
      blk_skipped  <= 1'b0;
    end else begin
      blk_captured <= 1'b0;
      blk_skipped  <= 1'b0;
      if (boundary)
        blk_cnt <= (blk_cnt + 16'd1 >= db) ? '0 : blk_cnt + 16'd1;
      case (state)
        S_IDLE: begin
          if (slot && enable) begin
            state    <= S_CAPT;
            blk_base <= w_idx;
            w_done   <= 1'b0;
            e_done   <= 1'b0;
          end
        end
        S_CAPT: begin
          if (slot && enable) blk_skipped <= 1'b1;
          if (w_valid && w_off == idx_t'(N - 1)) w_done <= 1'b1;
          if (e_valid && e_off == idx_t'(N - 2)) e_done <= 1'b1;
          if (w_done && e_done) begin
            state        <= S_FULL;
            blk_captured <= 1'b1;
          end
        end
        default: begin  // S_FULL: owned by the engine
          if (slot && enable) blk_skipped <= 1'b1;
          if (blk_done) state <= S_IDLE;
        end
      endcase
    end
  end

  assign blk_ready = (state == S_FULL);

  // Buffers.
  logic w_we, e_we;
  always_comb begin
    w_we = 1'b0;
    e_we = 1'b0;
    if (state == S_IDLE && slot && enable) w_we = 1'b1;
    if (state == S_CAPT && w_valid && w_off < idx_t'(N)) w_we = 1'b1;
    if (state == S_CAPT && e_valid && e_off < idx_t'(N) && !e_off[0]) e_we = 1'b1;
  end

  logic [AW-1:0] w_wa;
  assign w_wa = (state == S_IDLE) ? '0 : w_off[AW-1:0];

  always_ff @(posedge clk) begin
    for (int i = 0; i < NCH; i++) begin
      if (w_we) wbuf[i][w_wa] <= w_in[i];
      if (e_we) ebuf[i][e_off[AW-1:1]] <= e_in[i];
    end
  end

  // Read ports.
  logic e_rd_odd;
  always_ff @(posedge clk) begin
    e_rd_odd <= e_rd_addr[0];
    for (int i = 0; i < NCH; i++) begin
      w_rd_data[i] <= wbuf[i][w_rd_addr];
    end
  end

  u_t e_rd_q [NCH];
  always_ff @(posedge clk) begin
    for (int i = 0; i < NCH; i++) e_rd_q[i] <= ebuf[i][e_rd_addr[AW-1:1]];
  end
  always_comb begin
    for (int i = 0; i < NCH; i++) e_rd_data[i] = e_rd_odd ? '0 : e_rd_q[i];
  end

endmodule
