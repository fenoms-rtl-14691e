// tb_fenoms_sweep: the margin and parallelism sweep run end to end.
//
// Runs the whole search engine for every m in 1, 2, 4, 8, 16 and every
// symmetric margin alpha in 0.5, 1.5, 2.5 (15 searches on one library), the
// grid over which the accuracy of D-BAM is studied. The instance has
// 120-bit hypervectors packed by 3 (40 cells, folded 16 + 16 + 8 over three
// blocks of 16 wordlines, so m = 16 opens a whole string and pads half of
// the last part), 2 string rows, 2 planes of 8 bitlines: 32 references made
// of exact copies, copies with 2, 6 or 12 flipped bits and random vectors.
// For every search the top-3 ids and scores must equal the reference
// model's ranking (ties to the lower id) and the cycle count must match the
// schedule. It also checks that a wider margin never lowers an exact
// copy's score and that every m value and margin was run.
module tb_fenoms_sweep;
  import fenoms_pkg::*;
  import fenoms_ref_pkg::*;

  localparam int D = 120, PF = 3, WL = 16, SSL = 2, BLOCKS = 4, PLANES = 2, BL = 8;
  localparam int MAXM = 16, IO_W = 4, T_READ = 2, K = 3, ENC_W = 8, ENC_CNT_W = 4;
  localparam int LW = 2, NCELLS = 40, NPARTS = 3, COLS = 2, ROWS = PLANES * COLS;
  localparam int NREF = SSL * PLANES * BL;
  localparam int IDW = $clog2(NREF), SCORE_W = $clog2(2 * NCELLS + 1);

  logic clk = 0, rst_n = 0;
  logic enc_clear = 0, enc_valid = 0, enc_finalize = 0, enc_busy, query_valid;
  logic [ENC_W-1:0] enc_id, enc_lvl;
  logic prog_en = 0;
  logic [0:0] prog_plane, prog_ssl;
  logic [1:0] prog_block;
  logic [3:0] prog_wl;
  logic [BL*LW-1:0] prog_data;
  logic search_start = 0, search_busy, search_done;
  logic [4:0] log2m;
  logic [4:0] alpha_pos_x2, alpha_neg_x2;
  logic top_valid [K];
  logic [IDW-1:0] top_id [K];
  logic [SCORE_W-1:0] top_score [K];

  fenoms_top #(.D(D), .PF(PF), .WL(WL), .SSL(SSL), .BLOCKS(BLOCKS), .PLANES(PLANES), .BL(BL),
               .MAXM(MAXM), .IO_W(IO_W), .T_READ(T_READ), .K(K), .ENC_W(ENC_W),
               .ENC_CNT_W(ENC_CNT_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int m_seen [5] = '{0, 0, 0, 0, 0};
  int a_seen [3] = '{0, 0, 0};

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit qhv [];
  bit lib [NREF][];

  function automatic int subsets(int m);
    int n;
    n = 0;
    for (int p = 0; p < NPARTS; p++) begin
      int cells;
      cells = (NCELLS - p * WL < WL) ? NCELLS - p * WL : WL;
      n += (cells + m - 1) / m;
    end
    return n;
  endfunction

  initial begin
    int npk, prev_copy;
    qhv = new[D];
    repeat (2) @(negedge clk);
    rst_n <= 1;
    @(negedge clk);

    // ---- encode the query from 7 random peaks ----
    npk = 7;
    begin
      int cnt [D];
      for (int d = 0; d < D; d++) cnt[d] = 0;
      enc_clear <= 1;
      @(negedge clk);
      enc_clear <= 0;
      for (int p = 0; p < npk; p++) begin
        logic [D-1:0] id, lv;
        id = D'({$urandom, $urandom, $urandom, $urandom});
        lv = D'({$urandom, $urandom, $urandom, $urandom});
        for (int d = 0; d < D; d++) cnt[d] += int'(id[d] ^ lv[d]);
        for (int w = 0; w < D / ENC_W; w++) begin
          enc_valid <= 1; enc_id <= id[w*ENC_W +: ENC_W]; enc_lvl <= lv[w*ENC_W +: ENC_W];
          @(negedge clk);
        end
      end
      enc_valid <= 0;
      enc_finalize <= 1;
      @(negedge clk);
      enc_finalize <= 0;
      while (!query_valid) @(negedge clk);
      for (int d = 0; d < D; d++) qhv[d] = (2 * cnt[d] > npk);
    end

    // ---- library ----
    for (int r = 0; r < NREF; r++) begin
      int nflip;
      lib[r] = new[D];
      for (int d = 0; d < D; d++) lib[r][d] = qhv[d];
      nflip = (r == 9 || r == 26) ? 0 : (r % 4 == 0) ? 2 : (r % 4 == 1) ? 6 : (r % 4 == 2) ? 12 : -1;
      if (nflip < 0) for (int d = 0; d < D; d++) lib[r][d] = 1'($urandom_range(0, 1));
      else for (int f = 0; f < nflip; f++) begin
        int d;
        d = $urandom_range(0, D - 1);
        lib[r][d] = !lib[r][d];
      end
    end
    for (int s = 0; s < SSL; s++) for (int p = 0; p < PLANES; p++)
      for (int b = 0; b < BLOCKS; b++) for (int w = 0; w < WL; w++) begin
        logic [BL*LW-1:0] page;
        prog_en <= 1; prog_plane <= 1'(p); prog_block <= 2'(b); prog_ssl <= 1'(s); prog_wl <= 4'(w);
        for (int l = 0; l < BL; l++) begin
          int c, r;
          c = b * WL + w;
          r = (s * PLANES + p) * BL + l;
          page[l*LW +: LW] = (c < NCELLS) ? LW'(cell_val(lib[r], c, PF)) : '0;
        end
        prog_data <= page;
        @(negedge clk);
      end
    prog_en <= 0;
    @(negedge clk);

    // ---- sweep ----
    for (int lm = 0; lm <= 4; lm++) begin
      prev_copy = -1;
      for (int ai = 0; ai < 3; ai++) begin
        int m, a, sc [NREF], order [$], cycles, exp_cycles;
        m = 1 << lm;
        a = 2 * ai + 1;                      // 0.5, 1.5, 2.5 in half levels
        m_seen[lm]++;
        a_seen[ai]++;
        order.delete();
        for (int r = 0; r < NREF; r++) sc[r] = dbam_score(qhv, lib[r], PF, WL, m, a, a);
        for (int r = 0; r < NREF; r++) begin
          int pos;
          pos = 0;
          while (pos < order.size() && sc[order[pos]] >= sc[r]) pos++;
          order.insert(pos, r);
        end
        log2m <= 5'(lm); alpha_pos_x2 <= 5'(a); alpha_neg_x2 <= 5'(a);
        search_start <= 1;
        @(negedge clk);
        search_start <= 0;
        cycles = 1;
        while (!search_done && cycles < 100000) begin @(negedge clk); cycles++; end
        for (int i = 0; i < K; i++) begin
          checks++;
          if (!top_valid[i] || int'(top_id[i]) != order[i] || int'(top_score[i]) != sc[order[i]]) begin
            failures++;
            $display("FAIL m=%0d a=%0d rank %0d: got id %0d score %0d, expected id %0d score %0d",
                     m, a, i, top_id[i], top_score[i], order[i], sc[order[i]]);
          end
        end
        exp_cycles = 2 * SSL * subsets(m) * (T_READ + 3 + ROWS) + SSL * (ROWS * IO_W + 2) + 1;
        checks++;
        if (cycles != exp_cycles) begin
          failures++;
          $display("FAIL m=%0d a=%0d cycles=%0d expected %0d", m, a, cycles, exp_cycles);
        end
        // an exact copy passes every check whatever the margin
        checks++;
        if (sc[9] != 2 * subsets(m) || (prev_copy >= 0 && sc[9] < prev_copy)) begin
          failures++;
          $display("FAIL m=%0d a=%0d exact copy scores %0d", m, a, sc[9]);
        end
        prev_copy = sc[9];
        $display("search m=%0d alpha=%0d.%0d: best id %0d score %0d, 3rd score %0d, %0d cycles",
                 m, a / 2, 5 * (a % 2), top_id[0], top_score[0], top_score[K-1], cycles);
      end
    end

    checks += 8;
    for (int i = 0; i < 5; i++) if (m_seen[i] == 0) begin failures++; $display("FAIL m=%0d not run", 1 << i); end
    for (int i = 0; i < 3; i++) if (a_seen[i] == 0) begin failures++; $display("FAIL margin %0d not run", i); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
