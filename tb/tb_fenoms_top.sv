// tb_fenoms_top: end-to-end search on a small instance of the design.
//
// 42-bit hypervectors packed by 3 (14 cells, folded 8 + 6 over 2 blocks),
// 2 string rows, 2 planes of 6 bitlines: 24 references. The query is
// encoded from random peaks through the encoder; the library holds two exact
// copies of the query, near copies with a few flipped bits and random
// vectors. Searches run with m = 4, 1, 2 and several margins; the top-3 list
// (ids and scores) must match the reference model's scores sorted high
// first with ties to the lower id, and each search must take the cycle
// count worked out from the schedule. The testbench also counts, through
// the hierarchy, that failed upper and lower bound checks, padded lanes in
// the short last part, score clearing on a row's first transfer and top-k
// replacements all happen, and each m value is exercised.
module tb_fenoms_top;
  import fenoms_pkg::*;
  import fenoms_ref_pkg::*;

  localparam int D = 42, PF = 3, WL = 8, SSL = 2, BLOCKS = 2, PLANES = 2, BL = 6;
  localparam int MAXM = 4, IO_W = 4, T_READ = 2, K = 3, ENC_W = 14, ENC_CNT_W = 4;
  localparam int LW = 2, NCELLS = 14, NPARTS = 2, COLS = 2, ROWS = PLANES * COLS;
  localparam int NREF = SSL * PLANES * BL;
  localparam int IDW = $clog2(NREF), SCORE_W = $clog2(2 * NCELLS + 1);

  logic clk = 0, rst_n = 0;
  logic enc_clear = 0, enc_valid = 0, enc_finalize = 0, enc_busy, query_valid;
  logic [ENC_W-1:0] enc_id, enc_lvl;
  logic prog_en = 0;
  logic [0:0] prog_plane, prog_block, prog_ssl;
  logic [2:0] prog_wl;
  logic [BL*LW-1:0] prog_data;
  logic search_start = 0, search_busy, search_done;
  logic [2:0] log2m;
  logic [4:0] alpha_pos_x2, alpha_neg_x2;
  logic top_valid [K];
  logic [IDW-1:0] top_id [K];
  logic [SCORE_W-1:0] top_score [K];

  fenoms_top #(.D(D), .PF(PF), .WL(WL), .SSL(SSL), .BLOCKS(BLOCKS), .PLANES(PLANES), .BL(BL),
               .MAXM(MAXM), .IO_W(IO_W), .T_READ(T_READ), .K(K), .ENC_W(ENC_W),
               .ENC_CNT_W(ENC_CNT_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_ubc_fail = 0, n_lbc_fail = 0, n_pad = 0, n_first = 0, n_replace = 0;
  int m_seen [3] = '{0, 0, 0};

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (dut.sense_valid[0] && dut.chk == CHK_UBC && dut.g_plane[0].sense_bits != '1) n_ubc_fail++;
    if (dut.sense_valid[0] && dut.chk == CHK_LBC && dut.g_plane[0].sense_bits != '0) n_lbc_fail++;
    if (dut.read_en) for (int w = 0; w < WL; w++)
      if (dut.wl_sel[w] && !dut.q_valid[w % (1 << dut.cur_log2m)]) n_pad++;
    if (dut.io_valid && dut.io_ready && dut.first) n_first++;
    if (dut.cand_valid && top_valid[0] && dut.u_topk.better[0]) n_replace++;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit qhv [];
  bit lib [NREF][];

  initial begin
    int npk;
    int ms [4] = '{2, 0, 1, 2};
    int aps [4] = '{3, 1, 5, 3};
    int ans [4] = '{3, 1, 5, 1};
    qhv = new[D];
    repeat (2) @(negedge clk);
    rst_n <= 1;
    @(negedge clk);

    // ---- encode the query ----
    npk = 5;
    begin
      int cnt [D];
      for (int d = 0; d < D; d++) cnt[d] = 0;
      enc_clear <= 1;
      @(negedge clk);
      enc_clear <= 0;
      for (int p = 0; p < npk; p++) begin
        logic [D-1:0] id, lv;
        id = D'({$urandom, $urandom});
        lv = D'({$urandom, $urandom});
        for (int d = 0; d < D; d++) cnt[d] += id[d] ^ lv[d];
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

    // ---- build and program the library ----
    for (int r = 0; r < NREF; r++) begin
      lib[r] = new[D];
      for (int d = 0; d < D; d++) lib[r][d] = qhv[d];
      if (r == 3 || r == 17) ;                                   // exact copies
      else if (r % 3 == 0) for (int f = 0; f < 2; f++) lib[r][$urandom_range(0, D - 1)] ^= 1;
      else if (r % 3 == 1) for (int f = 0; f < 6; f++) lib[r][$urandom_range(0, D - 1)] ^= 1;
      else for (int d = 0; d < D; d++) lib[r][d] = $urandom_range(0, 1);
    end
    for (int s = 0; s < SSL; s++) for (int p = 0; p < PLANES; p++)
      for (int b = 0; b < BLOCKS; b++) for (int w = 0; w < WL; w++) begin
        logic [BL*LW-1:0] page;
        prog_en <= 1; prog_plane <= 1'(p); prog_block <= 1'(b); prog_ssl <= 1'(s); prog_wl <= 3'(w);
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

    // ---- searches ----
    for (int t = 0; t < 4; t++) begin
      int m, sc [NREF], order [$], cycles, nreads, exp_cycles;
      m = 1 << ms[t];
      m_seen[ms[t]]++;
      order.delete();
      for (int r = 0; r < NREF; r++) sc[r] = dbam_score(qhv, lib[r], PF, WL, m, aps[t], ans[t]);
      // stable sort by score, high first
      for (int r = 0; r < NREF; r++) begin
        int pos;
        pos = 0;
        while (pos < order.size() && sc[order[pos]] >= sc[r]) pos++;
        order.insert(pos, r);
      end
      log2m <= 3'(ms[t]); alpha_pos_x2 <= 5'(aps[t]); alpha_neg_x2 <= 5'(ans[t]);
      search_start <= 1;
      @(negedge clk);
      search_start <= 0;
      cycles = 1;
      while (!search_done && cycles < 100000) begin @(negedge clk); cycles++; end
      for (int i = 0; i < K; i++) begin
        checks++;
        if (!top_valid[i] || int'(top_id[i]) != order[i] || int'(top_score[i]) != sc[order[i]]) begin
          failures++;
          $display("FAIL m=%0d rank %0d: got id %0d score %0d, expected id %0d score %0d",
                   m, i, top_id[i], top_score[i], order[i], sc[order[i]]);
        end
      end
      // the exact copies must reach the full score of 2 per subset
      checks++;
      if (sc[3] != 2 * (((8 + m - 1) / m) + ((6 + m - 1) / m))) begin failures++; $display("FAIL model full score"); end
      nreads = 2 * SSL * (((8 + m - 1) / m) + ((6 + m - 1) / m));
      // per read: issue, T_READ, 1 to see the sense, transfer start,
      // ROWS words, 1 to see the transfer end; per string row: drain start,
      // ROWS*IO_W scores, 1 to see the drain end; plus the done cycle
      exp_cycles = nreads * (T_READ + 3 + ROWS) + SSL * (ROWS * IO_W + 2) + 1;
      checks++;
      if (cycles != exp_cycles) begin failures++; $display("FAIL m=%0d cycles=%0d expected %0d", m, cycles, exp_cycles); end
      $display("search m=%0d ap=%0d an=%0d: best id %0d score %0d, %0d cycles", m, aps[t], ans[t], top_id[0], top_score[0], cycles);
    end

    checks += 7;
    if (n_ubc_fail == 0) begin failures++; $display("FAIL no failed UBC seen"); end
    if (n_lbc_fail == 0) begin failures++; $display("FAIL no failed LBC seen"); end
    if (n_pad == 0)      begin failures++; $display("FAIL no padded lane seen"); end
    if (n_first == 0)    begin failures++; $display("FAIL no clearing transfer seen"); end
    if (n_replace == 0)  begin failures++; $display("FAIL no top-k replacement seen"); end
    for (int i = 0; i < 3; i++) if (m_seen[i] == 0) begin failures++; $display("FAIL m=%0d not run", 1 << i); end
    $display("mechanisms: ubc_fail=%0d lbc_fail=%0d padded_lanes=%0d clearing_words=%0d topk_replace=%0d m1=%0d m2=%0d m4=%0d",
             n_ubc_fail, n_lbc_fail, n_pad, n_first, n_replace, m_seen[0], m_seen[1], m_seen[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
