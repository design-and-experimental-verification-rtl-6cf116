// tb_ce_filter -- self-checking test of the Compensation Equalizer.
//
// Random ADC samples (with random gaps in in_valid), random per-phase
// coefficients and offsets. A reference model in this file keeps its own
// history of offset-free samples and computes
//   w = sat(4*y - ofs[n mod M]),  x = sat(round(sum g[n mod M][l] w[n-l] / 2^14))
// and every x and w the block emits is compared with it, together with the
// index tag and the 2-cycle input-to-x latency. A second phase checks the
// bypass mode (x = 4*y, no offset, no delay).
module tb_ce_filter;
  import ebp_pkg::*;

  localparam int unsigned M  = 16;
  localparam int unsigned LG = 7;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic bypass, in_valid, w_valid, x_valid;
  idx_t in_idx, w_idx, x_idx;
  adc_t in_y;
  g_t   g [M][LG];
  ofs_t ofs [M];
  w_t   w_out;
  x_t   x_out;

  ce_filter #(.M(M), .LG(LG)) dut (.*);

  // Reference model.
  longint whist [LG];
  typedef struct { longint idx; longint w; longint x; longint t; } exp_t;
  exp_t q [$];

  function automatic longint satl(longint v, int w);
    longint hi = (64'sd1 <<< (w - 1)) - 1;
    longint lo = -(64'sd1 <<< (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  task automatic push_ref(longint idx, longint y);
    longint w, acc, x;
    int ph = int'(idx % M);
    w = bypass ? satl(y * 4, W_W) : satl(y * 4 - longint'(ofs[ph]), W_W);
    for (int l = LG - 1; l > 0; l--) whist[l] = whist[l-1];
    whist[0] = w;
    acc = 0;
    for (int l = 0; l < LG; l++) acc += longint'(g[ph][l]) * whist[l];
    x = bypass ? satl(w, X_W) : satl((acc + 8192) >>> 14, X_W);
    q.push_back('{idx, w, x, longint'(cyc)});
  endtask

  // Checker.
  always @(posedge clk) begin
    if (rst_n && x_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected x");
      end else begin
        e = q.pop_front();
        if (longint'(x_idx) != e.idx || longint'(x_out) != e.x || cyc - e.t != 2) begin
          failures++;
          if (failures < 10)
            $display("FAIL idx=%0d x=%0d exp %0d (idx %0d) lat=%0d", x_idx, x_out, e.x, e.idx, cyc - e.t);
        end
      end
    end
  end

  // w is checked one cycle earlier against the history head.
  longint w_exp_q [$];
  always @(posedge clk) begin
    if (rst_n && w_valid) begin
      checks++;
      if (w_exp_q.size() == 0 || longint'(w_out) != w_exp_q.pop_front()) begin
        failures++;
        if (failures < 10) $display("FAIL w=%0d", w_out);
      end
    end
  end

  task automatic run(int nsamp);
    int sent = 0;
    while (sent < nsamp) begin
      @(negedge clk);
      if ($urandom_range(0, 3) != 0) begin
        in_valid = 1'b1;
        in_y     = adc_t'($urandom);
        in_idx   = in_idx + 1;
        push_ref(longint'(in_idx), longint'(in_y));
        w_exp_q.push_back(whist[0]);
        sent++;
      end else begin
        in_valid = 1'b0;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bypass   = 1'b0;
    in_valid = 1'b0;
    in_idx   = idx_t'(32'hFFFFFF - 40);   // crosses the index wrap
    in_y     = '0;
    for (int m = 0; m < M; m++) begin
      ofs[m] = ofs_t'($signed($urandom_range(0, 80)) - 40);
      for (int l = 0; l < LG; l++) g[m][l] = g_t'($signed($urandom_range(0, 16000)) - 8000);
      g[m][3] = g_t'(16384 + $signed($urandom_range(0, 4000)) - 2000);
    end
    for (int l = 0; l < LG; l++) whist[l] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(3000);
    // Bypass mode: the reference history restarts with bypassed samples.
    bypass = 1'b1;
    run(500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
