// tb_pam_slicer -- self-checking test of the PAM slicer.
//
// For 8-PAM (64-QAM) and 16-PAM (256-QAM) and several level spacings, random
// slicer inputs (including values far outside the constellation) are fed in.
// The reference finds the nearest of the levels (2k+1)*A by exhaustive
// search over all levels, which is independent of the block's shift-based
// decision; a tie between two levels is resolved towards the upper one.
// Decision, level number, error u - a_hat, tag and the one-cycle latency are
// checked.
module tb_pam_slicer;
  import ebp_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic       qam256;
  logic [3:0] a_shift;
  logic       u_valid, e_valid;
  idx_t       u_idx, e_idx;
  u_t         u_in [NCH];
  u_t         e_out [NCH];
  u_t         ahat_out [NCH];
  logic signed [4:0] sym_out [NCH];

  pam_slicer dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    qam256  = 1'b0;
    a_shift = 4'd4;
    u_valid = 1'b0;
    u_idx   = '0;
    for (int j = 0; j < NCH; j++) u_in[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6000; t++) begin
      longint A, L, best_a [NCH], best_k [NCH];
      @(negedge clk);
      qam256  = (t >= 3000);
      a_shift = 4'(3 + (t / 1000) % 3);
      A = 64'sd1 <<< a_shift;
      L = qam256 ? 16 : 8;
      u_valid = 1'b1;
      u_idx   = idx_t'(t);
      for (int j = 0; j < NCH; j++) begin
        longint bd;
        u_in[j] = u_t'($signed($urandom_range(0, 2 * L * A * 3 / 2)) - L * A * 3 / 2);
        bd = 64'h7fffffffffffffff;
        for (longint k = -L / 2; k < L / 2; k++) begin
          longint lev, d;
          lev = (2 * k + 1) * A;
          d = longint'(u_in[j]) - lev;
          if (d < 0) d = -d;
          if (d <= bd) begin
            bd = d;
            best_a[j] = lev;
            best_k[j] = k;
          end
        end
      end
      @(posedge clk);
      #1;
      checks++;
      begin
        bit bad;
        bad = (e_valid !== 1'b1) || (e_idx != u_idx);
        for (int j = 0; j < NCH; j++) begin
          if (longint'(ahat_out[j]) != best_a[j]) bad = 1;
          if (longint'(sym_out[j]) != best_k[j]) bad = 1;
          if (longint'(e_out[j]) != longint'(u_in[j]) - best_a[j]) bad = 1;
        end
        if (bad) begin
          failures++;
          if (failures < 10)
            $display("FAIL t=%0d u=%0d a=%0d exp %0d", t, u_in[0], ahat_out[0], best_a[0]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
