// topk_select: keeps the K highest-scoring references of a search.
//
// Candidates arrive one per cycle (cand_valid, cand_id, cand_score). The
// list is held sorted, best first. A candidate whose score is strictly
// greater than entry i's (or entry i is empty) is inserted at the first such
// position and the entries below shift down by one, the last falling off.
// Equal scores keep the earlier candidate ahead, so ties resolve to the
// lower reference index when references arrive in index order. clear
// empties the list; it wins over a candidate in the same cycle.
//
// One cycle per candidate, results registered. Selecting the top-k
// references by similarity is the paper's (Sec. II-A); the insertion list,
// the tie rule and K = 4 are this design's.
module topk_select #(
  parameter int unsigned K       = 4,
  parameter int unsigned IDW     = 21,
  parameter int unsigned SCORE_W = 11
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               cand_valid,
  input  logic [IDW-1:0]     cand_id,
  input  logic [SCORE_W-1:0] cand_score,
  output logic               top_valid [K],
  output logic [IDW-1:0]     top_id    [K],
  output logic [SCORE_W-1:0] top_score [K]
);

  logic better [K];   // candidate beats entry i
  logic above  [K];   // candidate beats entry i-1 (so entry i shifts down)

  always_comb
    for (int unsigned i = 0; i < K; i++) begin
      better[i] = !top_valid[i] || (cand_score > top_score[i]);
      above[i]  = 1'b0;
      if (i > 0) above[i] = !top_valid[i-1] || (cand_score > top_score[i-1]);
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < K; i++) begin
        top_valid[i] <= 1'b0;
        top_id[i]    <= '0;
        top_score[i] <= '0;
      end
    end else if (clear) begin
      for (int unsigned i = 0; i < K; i++) top_valid[i] <= 1'b0;
    end else if (cand_valid) begin
      for (int unsigned i = 0; i < K; i++) begin
        if (better[i] && !above[i]) begin
          // insertion point
          top_valid[i] <= 1'b1;
          top_id[i]    <= cand_id;
          top_score[i] <= cand_score;
        end else if (above[i]) begin
          // shifted down by an insertion above
          top_valid[i] <= top_valid[i-1];
          top_id[i]    <= top_id[i-1];
          top_score[i] <= top_score[i-1];
        end
      end
    end
  end

endmodule
