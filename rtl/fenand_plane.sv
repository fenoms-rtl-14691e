// fenand_plane: behavioural model of one 3D FeNAND plane with its sense
// amplifiers. Not synthesizable logic: it stands for the memory array.
//
// A plane has BLOCKS blocks; in each block every bitline reaches SSL
// vertical strings (one per string select line) of WL series cells. A cell
// stores a level 0..PF (PF adjacent hypervector bits summed), seen as a
// threshold code 2*level on the scale of fenoms_pkg. Pages (one wordline of
// one string row of one block, across all BL bitlines) are written with
// prog_en and kept sparsely, so an unwritten page reads as the erased level 0.
//
// A read (read_en) selects one block and one string row and applies a bias
// code to each of its WL wordlines. A string conducts when every cell's
// threshold is at or below its wordline bias; the pass bias turns any cell
// on. This is the serial AND of D-BAM: with m wordlines biased at the query,
// one read yields the product of m comparisons per bitline. After T_READ
// clock cycles (T_READ >= 2; the read_en cycle counts as cycle 0, sense_valid
// is high in cycle T_READ) sense_valid pulses for one cycle with
// sense_bits[b] = 1 when bitline b carried current. Reads are not accepted
// while busy.
//
// The string behaviour (current only when all cells are on), the level
// mapping and the sizes WL = 32, SSL = 16, BLOCKS = 128, BL = 5462 (PF3) are
// the paper's; the code scale, the sparse store, the fixed read latency and
// the absence of threshold noise are this model's simplifications.
module fenand_plane
  import fenoms_pkg::*;
#(
  parameter int unsigned WL     = 32,
  parameter int unsigned SSL    = 16,
  parameter int unsigned BLOCKS = 128,
  parameter int unsigned BL     = 5462,
  parameter int unsigned PF     = 3,
  parameter int unsigned T_READ = 4,
  localparam int unsigned LW    = $clog2(PF + 1),
  localparam int unsigned WAW   = $clog2(WL),
  localparam int unsigned SAW   = (SSL > 1) ? $clog2(SSL) : 1,
  localparam int unsigned BAW   = (BLOCKS > 1) ? $clog2(BLOCKS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // page program
  input  logic               prog_en,
  input  logic [BAW-1:0]     prog_block,
  input  logic [SAW-1:0]     prog_ssl,
  input  logic [WAW-1:0]     prog_wl,
  input  logic [BL*LW-1:0]   prog_data,
  // D-BAM read
  input  logic               read_en,
  input  logic [BAW-1:0]     read_block,
  input  logic [SAW-1:0]     read_ssl,
  input  vcode_t             wl_v [WL],
  output logic               busy,
  output logic               sense_valid,
  output logic [BL-1:0]      sense_bits
);

  typedef logic [BL*LW-1:0] page_t;

  page_t       pages [int unsigned];
  int unsigned timer;
  logic [BAW-1:0] rd_block;
  logic [SAW-1:0] rd_ssl;
  vcode_t      rd_v [WL];

  function automatic int unsigned page_key(logic [BAW-1:0] b, logic [SAW-1:0] s,
                                           int unsigned w);
    return (int'(b) * SSL + int'(s)) * WL + w;
  endfunction

  assign busy = (timer != 0);

  // Page program. The sparse store is a dynamic array, hence a plain
  // always block with a blocking write.
  always @(posedge clk)
    if (prog_en) pages[page_key(prog_block, prog_ssl, int'(prog_wl))] = prog_data;

  initial assert (T_READ >= 2) else $fatal(1, "fenand_plane: T_READ must be at least 2");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timer       <= 0;
      sense_valid <= 1'b0;
      sense_bits  <= '0;
    end else begin
      sense_valid <= 1'b0;
      if (timer == 0) begin
        if (read_en) begin
          timer    <= T_READ - 1;
          rd_block <= read_block;
          rd_ssl   <= read_ssl;
          rd_v     <= wl_v;
        end
      end else if (timer == 1) begin
        automatic logic [BL-1:0] on = '1;
        for (int unsigned w = 0; w < WL; w++) begin
          if (rd_v[w] != VPASS) begin
            automatic int unsigned key = page_key(rd_block, rd_ssl, w);
            automatic page_t pg = pages.exists(key) ? pages[key] : page_t'(0);
            for (int unsigned b = 0; b < BL; b++)
              if (int'(rd_v[w]) < 2 * int'(pg[b*LW +: LW])) on[b] = 1'b0;
          end
        end
        sense_bits  <= on;
        sense_valid <= 1'b1;
        timer       <= 0;
      end else begin
        timer <= timer - 1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(read_en && busy))
    else $error("fenand_plane: read issued while busy");

endmodule
