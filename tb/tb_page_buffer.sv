// tb_page_buffer: checks that a loaded page reads back column by column,
// inverted for lower bound checks, with zeros past the last bitline, and
// that the page holds while load is low.
module tb_page_buffer;
  import fenoms_pkg::*;
  localparam int unsigned BL = 10, IO_W = 4, COLS = 3;
  logic clk = 0, rst_n = 0, load = 0;
  chk_t chk;
  logic [BL-1:0] sense_bits;
  logic [1:0] col;
  logic [IO_W-1:0] dout;
  int checks = 0, failures = 0;

  page_buffer #(.BL(BL), .IO_W(IO_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [BL-1:0] page;
    chk_t c;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 100; t++) begin
      page = BL'($urandom);
      c = chk_t'($urandom_range(0, 1));
      load <= 1; chk <= c; sense_bits <= page;
      @(posedge clk);
      load <= 0; sense_bits <= BL'($urandom);   // must not disturb the page
      @(posedge clk);
      for (int k = 0; k < COLS; k++) begin
        logic [IO_W-1:0] exp;
        col <= 2'(k);
        @(negedge clk);
        for (int j = 0; j < IO_W; j++) begin
          int l;
          l = k * IO_W + j;
          exp[j] = (l < BL) ? (page[l] ^ (c == CHK_LBC)) : 1'b0;
        end
        checks++;
        if (dout !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL col=%0d got=%h exp=%h", k, dout, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
