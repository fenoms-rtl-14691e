// tb_dbam_controller: checks the read sequence of a search.
// A 40-bit hypervector packed by 3 is 14 cells, folded over 2 blocks of 8
// wordlines (8 + 6 cells), with 2 string rows. The testbench answers reads
// after a fixed sense delay and transfers after a fixed transfer delay, and
// compares every read (row, block, wordline base, cell base, check type,
// first flag) with the nested loops of the expected schedule, for
// m = 1, 2, 4. It also checks the read count and the total cycle count.
module tb_dbam_controller;
  import fenoms_pkg::*;
  localparam int unsigned D = 40, PF = 3, WL = 8, SSL = 2, BLOCKS = 2, MAXM = 4;
  localparam int unsigned NCELLS = 14, NPARTS = 2;
  localparam int SENSE_LAT = 3, XFER_LAT = 5, DRAIN_LAT = 7;
  logic clk = 0, rst_n = 0, start = 0;
  logic [2:0] log2m_in, log2m;
  logic busy, done, read_en, xfer_start, first, drain_start;
  logic [0:0] block, ssl;
  logic [2:0] wl_addr;
  logic [3:0] cell_base;
  chk_t chk;
  logic sense_valid = 0, xfer_done = 0, drain_done = 0;
  int checks = 0, failures = 0;

  dbam_controller #(.D(D), .PF(PF), .WL(WL), .SSL(SSL), .BLOCKS(BLOCKS), .MAXM(MAXM)) dut (.*);

  always #5 clk = ~clk;

  // environment: fixed delays for sensing, transfer and drain
  int s_cnt = 0, x_cnt = 0, d_cnt = 0;
  always_ff @(posedge clk) begin
    sense_valid <= 0; xfer_done <= 0; drain_done <= 0;
    if (read_en) s_cnt <= SENSE_LAT; else if (s_cnt > 0) begin s_cnt <= s_cnt - 1; if (s_cnt == 1) sense_valid <= 1; end
    if (xfer_start) x_cnt <= XFER_LAT; else if (x_cnt > 0) begin x_cnt <= x_cnt - 1; if (x_cnt == 1) xfer_done <= 1; end
    if (drain_start) d_cnt <= DRAIN_LAT; else if (d_cnt > 0) begin d_cnt <= d_cnt - 1; if (d_cnt == 1) drain_done <= 1; end
  end

  // expected schedule
  typedef struct { int s, p, wl, cb, c, f; } rd_t;
  rd_t exp_q [$];
  int drains;
  always @(posedge clk) if (rst_n) begin
    if (drain_start) drains++;
    if (read_en) begin
      rd_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected read"); end
      else begin
        e = exp_q.pop_front();
        if (int'(ssl) != e.s || int'(block) != e.p || int'(wl_addr) != e.wl || int'(cell_base) != e.cb
            || int'(chk) != e.c || int'(first) != e.f) begin
          failures++;
          if (failures < 10) $display("FAIL read s=%0d p=%0d wl=%0d cb=%0d c=%0d f=%0d exp %0d %0d %0d %0d %0d %0d",
            ssl, block, wl_addr, cell_base, chk, first, e.s, e.p, e.wl, e.cb, e.c, e.f);
        end
      end
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int lm = 0; lm <= 2; lm++) begin
      int m, nreads, cycles, exp_cycles;
      m = 1 << lm;
      nreads = 0;
      for (int s = 0; s < SSL; s++)
        for (int p = 0; p < NPARTS; p++) begin
          int cells;
          cells = (NCELLS - p * WL < WL) ? NCELLS - p * WL : WL;
          for (int j = 0; j < (cells + m - 1) / m; j++)
            for (int c = 0; c < 2; c++) begin
              rd_t e;
              e.s = s; e.p = p; e.wl = j * m; e.cb = p * WL + j * m; e.c = c;
              e.f = (p == 0 && j == 0 && c == 0);
              exp_q.push_back(e);
              nreads++;
            end
        end
      drains = 0;
      log2m_in <= 3'(lm);
      start <= 1;
      @(posedge clk);
      start <= 0;
      cycles = 0;
      while (!done && cycles < 10000) begin @(posedge clk); cycles++; end
      checks += 3;
      if (exp_q.size() != 0) begin failures++; $display("FAIL %0d reads missing", exp_q.size()); end
      if (drains != SSL) begin failures++; $display("FAIL drains=%0d", drains); end
      // per read: the read cycle, SENSE_LAT, one cycle to see sense_valid,
      // the transfer start cycle, XFER_LAT, one cycle to see xfer_done;
      // per string row: drain start, DRAIN_LAT, one cycle to see drain_done;
      // plus the cycle in which done is seen.
      exp_cycles = nreads * (SENSE_LAT + XFER_LAT + 4) + SSL * (DRAIN_LAT + 2) + 1;
      if (cycles != exp_cycles) begin failures++; $display("FAIL m=%0d cycles=%0d exp=%0d", m, cycles, exp_cycles); end
      exp_q.delete();
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
