// tb_shared_io: checks the plane-major column walk of the shared I/O.
// Three planes of 10 bitlines, 4 bits per column: every word must appear
// once, in order, carrying its plane's data for the column it drives, and
// must hold while the receiver stalls. With the receiver always ready the
// transfer must take PLANES*COLS cycles.
module tb_shared_io;
  localparam int unsigned PLANES = 3, BL = 10, IO_W = 4, COLS = 3;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic [1:0] col;
  logic [IO_W-1:0] pb_dout [PLANES];
  logic out_valid, out_ready;
  logic [3:0] out_row;
  logic [IO_W-1:0] out_data;
  int checks = 0, failures = 0;
  logic [IO_W-1:0] pat [PLANES][COLS];

  shared_io #(.PLANES(PLANES), .BL(BL), .IO_W(IO_W)) dut (.*);

  always #5 clk = ~clk;
  // page buffers: data depends on the column the interface drives
  always_comb for (int p = 0; p < PLANES; p++) pb_dout[p] = (int'(col) < COLS) ? pat[p][col] : '0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 20; t++) begin
      int expect_row, cycles, stall_pct;
      stall_pct = (t % 2 == 0) ? 0 : 40;
      for (int p = 0; p < PLANES; p++) for (int c = 0; c < COLS; c++) pat[p][c] = IO_W'($urandom);
      start <= 1;
      @(posedge clk);
      start <= 0;
      expect_row = 0; cycles = 0;
      while (!done && cycles < 200) begin
        out_ready <= ($urandom_range(1, 100) > stall_pct);
        @(negedge clk);
        if (out_valid && out_ready) begin
          checks++;
          if (int'(out_row) != expect_row || out_data !== pat[expect_row / COLS][expect_row % COLS]) begin
            failures++;
            if (failures < 10) $display("FAIL row=%0d exp=%0d data=%h", out_row, expect_row, out_data);
          end
          expect_row++;
        end
        @(posedge clk);
        cycles++;
      end
      checks++;
      if (expect_row != PLANES * COLS) begin failures++; $display("FAIL words=%0d", expect_row); end
      if (stall_pct == 0) begin
        checks++;
        // words take PLANES*COLS cycles; done follows one cycle later
        if (cycles != PLANES * COLS + 1) begin failures++; $display("FAIL cycles=%0d", cycles); end
      end
      out_ready <= 1;
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
