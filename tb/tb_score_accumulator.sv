// tb_score_accumulator: checks score counting and read-out.
// Two planes of 10 bitlines, 4 lanes per word (6 rows). Several rounds of
// random result words are sent with random stalls of the sender; the first
// round of a group overwrites, the later ones add. The drain must then give
// one score per real bitline (20), in plane/bitline order, matching a
// shadow count; padding lanes must not appear. Two groups are run.
module tb_score_accumulator;
  localparam int unsigned PLANES = 2, BL = 10, IO_W = 4, SCORE_W = 6, COLS = 3, ROWS = 6;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_first = 0, drain_start = 0;
  logic [2:0] in_row;
  logic [IO_W-1:0] in_bits;
  logic drain_busy, drain_done, cand_valid;
  logic [4:0] cand_ref;
  logic [SCORE_W-1:0] cand_score;
  int checks = 0, failures = 0;
  int shadow [PLANES * BL];
  int got_n;

  score_accumulator #(.PLANES(PLANES), .BL(BL), .IO_W(IO_W), .SCORE_W(SCORE_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && cand_valid) begin
    checks++;
    if (int'(cand_ref) != got_n || int'(cand_score) != shadow[got_n]) begin
      failures++;
      if (failures < 10) $display("FAIL ref=%0d exp_ref=%0d score=%0d exp=%0d", cand_ref, got_n, cand_score, shadow[got_n]);
    end
    got_n++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int g = 0; g < 2; g++) begin
      for (int r = 0; r < 10; r++)
        for (int row = 0; row < ROWS; row++) begin
          logic [IO_W-1:0] bits;
          bits = IO_W'($urandom);
          while ($urandom_range(0, 3) == 0) begin in_valid <= 0; @(posedge clk); end
          in_valid <= 1; in_row <= 3'(row); in_bits <= bits; in_first <= (r == 0);
          for (int l = 0; l < IO_W; l++) begin
            int bl, idx;
            bl = (row % COLS) * IO_W + l;
            idx = (row / COLS) * BL + bl;
            if (bl < BL) shadow[idx] = ((r == 0) ? 0 : shadow[idx]) + bits[l];
          end
          @(posedge clk);
        end
      in_valid <= 0;
      got_n = 0;
      drain_start <= 1;
      @(posedge clk);
      drain_start <= 0;
      while (!drain_done) @(posedge clk);
      checks++;
      if (got_n != PLANES * BL) begin failures++; $display("FAIL drained %0d", got_n); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
