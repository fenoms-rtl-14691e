// tb_fenoms_full: one complete search with every parameter at its default.
//
// 8192-bit hypervectors, PF3 (2731 cells, 86 parts over 128 blocks),
// 32 wordlines, 16 string rows, 23 planes of 5462 bitlines: 2,010,016
// reference slots. The query is encoded from 3 random peaks through the
// encoder. Three references are programmed (the rest of the library stays
// erased): an exact copy of the query in string row 0, plane 0, bitline 5, a
// partial copy (first half the query, second half random) on bitline 6, and an
// exact copy in the very last slot (row 15, plane 22, bitline 5461). One
// search with m = 4 and alpha = 1.5 must return, best first, the top 4 of
// the reference model's scores (ties to the lower id), and take the cycle
// count of the schedule.
module tb_fenoms_full;
  import fenoms_pkg::*;
  import fenoms_ref_pkg::*;

  localparam int D = 8192, PF = 3, WL = 32, SSL = 16, BLOCKS = 128, PLANES = 23, BL = 5462;
  localparam int IO_W = 64, T_READ = 4, K = 4, ENC_W = 64;
  localparam int LW = 2, NCELLS = 2731, NPARTS = 86, COLS = 86, ROWS = PLANES * COLS;
  localparam int IDW = 21, SCORE_W = 13;

  logic clk = 0, rst_n = 0;
  logic enc_clear = 0, enc_valid = 0, enc_finalize = 0, enc_busy, query_valid;
  logic [ENC_W-1:0] enc_id, enc_lvl;
  logic prog_en = 0;
  logic [4:0] prog_plane;
  logic [6:0] prog_block;
  logic [3:0] prog_ssl;
  logic [4:0] prog_wl;
  logic [BL*LW-1:0] prog_data;
  logic search_start = 0, search_busy, search_done;
  logic [4:0] log2m;
  logic [4:0] alpha_pos_x2, alpha_neg_x2;
  logic top_valid [K];
  logic [IDW-1:0] top_id [K];
  logic [SCORE_W-1:0] top_score [K];

  fenoms_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #1000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit qhv [], zero_hv [], near_hv [];

  // program the cells of the given references of one (string row, plane);
  // which[i] = 0 stores the query, 1 the partial copy
  task automatic program_rows(input int s, input int p, input int bls [], input int which []);
    for (int b = 0; b < NPARTS; b++)
      for (int w = 0; w < WL; w++) begin
        logic [BL*LW-1:0] page;
        int c;
        c = b * WL + w;
        if (c >= NCELLS) continue;
        page = '0;
        foreach (bls[i]) page[bls[i]*LW +: LW] = LW'(which[i] == 0 ? cell_val(qhv, c, PF) : cell_val(near_hv, c, PF));
        prog_en <= 1; prog_plane <= 5'(p); prog_block <= 7'(b); prog_ssl <= 4'(s); prog_wl <= 5'(w);
        prog_data <= page;
        @(negedge clk);
      end
    prog_en <= 0;
  endtask

  initial begin
    int npk, sc_copy, sc_near, sc_zero, cycles, nreads, exp_cycles;
    int cand_id [$], cand_sc [$], order [$];
    qhv = new[D]; zero_hv = new[D]; near_hv = new[D];
    repeat (2) @(negedge clk);
    rst_n <= 1;
    @(negedge clk);

    // ---- encode the query ----
    npk = 3;
    begin
      int cnt [D];
      for (int d = 0; d < D; d++) cnt[d] = 0;
      enc_clear <= 1;
      @(negedge clk);
      enc_clear <= 0;
      for (int p = 0; p < npk; p++) begin
        logic [D-1:0] id, lv;
        for (int i = 0; i < D / 32; i++) begin id[i*32 +: 32] = $urandom; lv[i*32 +: 32] = $urandom; end
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
      for (int d = 0; d < D; d++) begin qhv[d] = (2 * cnt[d] > npk); zero_hv[d] = 0; near_hv[d] = qhv[d]; end
      for (int d = D / 2; d < D; d++) near_hv[d] = $urandom_range(0, 1);
    end

    // ---- program: row 0 plane 0 bitlines 5 (copy) and 6 (near); last slot (copy)
    program_rows(0, 0, '{5, 6}, '{0, 1});
    program_rows(SSL - 1, PLANES - 1, '{BL - 1}, '{0});
    @(negedge clk);

    // ---- reference scores ----
    sc_copy = dbam_score(qhv, qhv, PF, WL, 4, 3, 3);
    sc_near = dbam_score(qhv, near_hv, PF, WL, 4, 3, 3);
    sc_zero = dbam_score(qhv, zero_hv, PF, WL, 4, 3, 3);
    $display("model scores: copy %0d near %0d erased %0d", sc_copy, sc_near, sc_zero);
    cand_id = '{0, 1, 2, 3, 4, 5, 6, 7, 8, SSL * PLANES * BL - 1};
    foreach (cand_id[i])
      cand_sc.push_back(cand_id[i] == 5 || cand_id[i] == SSL * PLANES * BL - 1 ? sc_copy :
                        cand_id[i] == 6 ? sc_near : sc_zero);
    foreach (cand_id[i]) begin
      int pos;
      pos = 0;
      while (pos < order.size() && cand_sc[order[pos]] >= cand_sc[i]) pos++;
      order.insert(pos, i);
    end

    // ---- search ----
    log2m <= 5'd2; alpha_pos_x2 <= 5'd3; alpha_neg_x2 <= 5'd3;
    search_start <= 1;
    @(negedge clk);
    search_start <= 0;
    cycles = 1;
    while (!search_done) begin @(negedge clk); cycles++; end
    for (int i = 0; i < K; i++) begin
      checks++;
      if (!top_valid[i] || int'(top_id[i]) != cand_id[order[i]] || int'(top_score[i]) != cand_sc[order[i]]) begin
        failures++;
        $display("FAIL rank %0d: got id %0d score %0d, expected id %0d score %0d",
                 i, top_id[i], top_score[i], cand_id[order[i]], cand_sc[order[i]]);
      end
      $display("rank %0d: id %0d score %0d", i, top_id[i], top_score[i]);
    end
    // 85 full parts of 8 subsets and a last part of 11 cells (3 subsets)
    nreads = 2 * SSL * (85 * 8 + 3);
    exp_cycles = nreads * (T_READ + 3 + ROWS) + SSL * (ROWS * IO_W + 2) + 1;
    checks++;
    if (cycles != exp_cycles) begin failures++; $display("FAIL cycles=%0d expected %0d", cycles, exp_cycles); end
    $display("search: %0d reads, %0d cycles (%0.3f ms at 1 GHz)", nreads, cycles, cycles / 1.0e6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
