// tb_topk_select: checks the best-K list against a sorted reference.
// Streams of random (id, score) candidates with many equal scores; after
// each candidate the list must equal the first K of the candidates sorted
// by score, high first, earlier candidate first among equals.
module tb_topk_select;
  localparam int unsigned K = 4, IDW = 8, SCORE_W = 4;
  logic clk = 0, rst_n = 0, clear = 0, cand_valid = 0;
  logic [IDW-1:0] cand_id;
  logic [SCORE_W-1:0] cand_score;
  logic top_valid [K];
  logic [IDW-1:0] top_id [K];
  logic [SCORE_W-1:0] top_score [K];
  int checks = 0, failures = 0;

  topk_select #(.K(K), .IDW(IDW), .SCORE_W(SCORE_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ids [$], scs [$];
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 20; t++) begin
      clear <= 1;
      @(posedge clk);
      clear <= 0;
      ids.delete(); scs.delete();
      for (int n = 0; n < 30; n++) begin
        int pos;
        cand_valid <= 1;
        cand_id <= IDW'(n + 16 * t);
        cand_score <= SCORE_W'($urandom_range(0, 6));
        @(posedge clk);
        cand_valid <= 0;
        // reference: stable insertion
        pos = 0;
        while (pos < scs.size() && scs[pos] >= int'(cand_score)) pos++;
        scs.insert(pos, int'(cand_score));
        ids.insert(pos, int'(cand_id));
        @(negedge clk);
        for (int i = 0; i < K; i++) begin
          checks++;
          if (i < scs.size()) begin
            if (!top_valid[i] || int'(top_score[i]) != scs[i] || int'(top_id[i]) != ids[i]) begin
              failures++;
              if (failures < 10) $display("FAIL i=%0d got %0d/%0d exp %0d/%0d", i, top_id[i], top_score[i], ids[i], scs[i]);
            end
          end else if (top_valid[i]) begin
            failures++;
            $display("FAIL entry %0d valid too early", i);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
