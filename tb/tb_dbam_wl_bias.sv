// tb_dbam_wl_bias: checks the wordline bias codes of both D-BAM checks.
// Selected wordlines with a valid lane must carry 2q+alpha_pos (UBC) or
// 2q-alpha_neg-1 (LBC), in half-level units; all others the pass code.
// Random queries, margins 1..5 half levels and m = 1, 2, 4 on 8 wordlines.
module tb_dbam_wl_bias;
  import fenoms_pkg::*;
  localparam int unsigned WL = 8, PF = 3, MAXM = 4;
  logic [WL-1:0] wl_sel;
  logic [2:0]    log2m;
  chk_t          chk;
  logic [4:0]    alpha_pos_x2, alpha_neg_x2;
  logic [1:0]    q [MAXM];
  logic          q_valid [MAXM];
  vcode_t        wl_v [WL];
  int checks = 0, failures = 0;

  dbam_wl_bias #(.WL(WL), .PF(PF), .MAXM(MAXM)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int m, base;
      log2m = 3'($urandom_range(0, 2));
      m = 1 << log2m;
      base = $urandom_range(0, WL / m - 1) * m;
      wl_sel = '0;
      for (int w = base; w < base + m; w++) wl_sel[w] = 1'b1;
      chk = chk_t'($urandom_range(0, 1));
      alpha_pos_x2 = 5'($urandom_range(1, 5));
      alpha_neg_x2 = 5'($urandom_range(1, 5));
      for (int k = 0; k < MAXM; k++) begin
        q[k] = 2'($urandom_range(0, 3));
        q_valid[k] = (k < m) && ($urandom_range(0, 5) != 0);
      end
      #1;
      for (int w = 0; w < WL; w++) begin
        int exp_v, k;
        k = w - base;
        if (w >= base && w < base + m && q_valid[k])
          exp_v = (chk == CHK_UBC) ? 2 * q[k] + alpha_pos_x2 : 2 * q[k] - alpha_neg_x2 - 1;
        else
          exp_v = 127;
        checks++;
        if (int'(wl_v[w]) != exp_v) begin
          failures++;
          if (failures < 10) $display("FAIL w=%0d got=%0d exp=%0d", w, wl_v[w], exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
