// page_buffer: one-bit-per-bitline result latch of a FeNAND plane.
//
// After a D-BAM read the sense amplifiers report, per bitline, whether the
// string conducted. The page buffer latches that page and turns it into
// check results: for an upper bound check a conducting string is a pass, for
// a lower bound check a non-conducting string is (Eq. 3: LBC = 1 - product),
// so the page is inverted on load when chk is LBC. The column path then reads
// the page IO_W bits at a time by column address; bits past the last bitline
// read as 0.
//
// load is sampled on the rising clock edge; dout is combinational from col.
// Keeping a single bit per string follows the paper (a subset of the
// existing multi-bit page buffer); doing the LBC inversion here and the
// column width IO_W are this design's choices.
module page_buffer
  import fenoms_pkg::*;
#(
  parameter int unsigned BL   = 5462,
  parameter int unsigned IO_W = 64,
  localparam int unsigned COLS = (BL + IO_W - 1) / IO_W,
  localparam int unsigned CAW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  chk_t             chk,
  input  logic [BL-1:0]    sense_bits,
  input  logic [CAW-1:0]   col,
  output logic [IO_W-1:0]  dout
);

  logic [COLS*IO_W-1:0] page_q;
  logic [BL-1:0]        result;

  assign result = (chk == CHK_LBC) ? ~sense_bits : sense_bits;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    page_q <= '0;
    else if (load) begin
      page_q          <= '0;
      page_q[BL-1:0]  <= result;
    end
  end

  assign dout = page_q[col*IO_W +: IO_W];

endmodule
