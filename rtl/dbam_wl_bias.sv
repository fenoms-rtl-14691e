// dbam_wl_bias: wordline bias selection for the two D-BAM checks.
//
// For a read, every wordline of the addressed string gets one bias code
// (see fenoms_pkg for the code scale). On a selected wordline carrying query
// element q (lane k = wordline index mod m):
//   UBC: 2*q + ALPHA_POS      the cell conducts when r <= q + alpha_pos
//   LBC: 2*q - ALPHA_NEG - 1  the cell conducts when r <  q - alpha_neg
// where ALPHA_* are the margins in half levels (alpha = 1.5 -> 3). The extra
// half step on the LBC side makes an exact tie count as "not below", so the
// checks follow the paper's Eq. 2 and 3 also for whole-level margins.
// Unselected wordlines, and selected ones whose lane holds no query element
// (the tail of the last folded part), get the pass bias so that they never
// break the series string.
//
// Combinational. The two biases q+alpha_pos and q-alpha_neg are the paper's;
// the code scale and the padding rule are this design's.
module dbam_wl_bias
  import fenoms_pkg::*;
#(
  parameter int unsigned WL   = 32,
  parameter int unsigned PF   = 3,
  parameter int unsigned MAXM = 16,
  localparam int unsigned LW  = $clog2(PF + 1),
  localparam int unsigned MW  = $clog2(MAXM + 1)
) (
  input  logic [WL-1:0] wl_sel,
  input  logic [MW-1:0] log2m,
  input  chk_t          chk,
  input  logic [4:0]    alpha_pos_x2,
  input  logic [4:0]    alpha_neg_x2,
  input  logic [LW-1:0] q      [MAXM],
  input  logic          q_valid[MAXM],
  output vcode_t        wl_v   [WL]
);

  always_comb begin
    for (int unsigned w = 0; w < WL; w++) begin
      automatic int unsigned lane = w & ((32'd1 << log2m) - 1);
      automatic vcode_t q2 = vcode_t'(2 * int'(q[lane % MAXM]));
      if (wl_sel[w] && q_valid[lane % MAXM]) begin
        if (chk == CHK_UBC) wl_v[w] = q2 + vcode_t'(alpha_pos_x2);
        else                wl_v[w] = q2 - vcode_t'(alpha_neg_x2) - 8'sd1;
      end else begin
        wl_v[w] = VPASS;
      end
    end
  end

endmodule
