// dbam_controller: sequencer of one D-BAM library search.
//
// Data layout (Fig. 3 of the design): a packed reference hypervector of
// NCELLS = ceil(D/PF) cells is folded into NPARTS = ceil(NCELLS/WL) parts;
// part p sits in block p, on the string of the reference's bitline and
// string row. A reference is thus named by (string row, plane, bitline), and
// all PLANES*BL references of one string row are scored together.
//
// For each string row s (outer loop), each part p and each m-subset j of
// that part (subset j covers wordlines j*m .. j*m+m-1, m = 2**log2m, the
// last part may hold fewer cells), the controller issues an upper bound
// check read and then a lower bound check read. Each read goes: read_en for
// one cycle; wait for sense_valid (the page buffers load on it); xfer_start
// for one cycle; wait for xfer_done (all result words have reached the
// accumulator). The very first transfer of a string row carries first = 1 so
// that the accumulator starts those scores from zero. After the last subset
// of the last part, drain_start hands the row's scores to the top-k stage;
// drain_done moves on to the next string row, and after the last row done
// pulses. log2m, and the margins outside this block, are taken at start.
//
// Reads and transfers do not overlap. UBC before LBC, m-subset reads and
// the folding over blocks are the paper's; the loop order (string rows
// outermost) and the strict read/transfer alternation are this design's.
module dbam_controller
  import fenoms_pkg::*;
#(
  parameter int unsigned D      = 8192,
  parameter int unsigned PF     = 3,
  parameter int unsigned WL     = 32,
  parameter int unsigned SSL    = 16,
  parameter int unsigned BLOCKS = 128,
  parameter int unsigned MAXM   = 16,
  localparam int unsigned NCELLS = (D + PF - 1) / PF,
  localparam int unsigned NPARTS = (NCELLS + WL - 1) / WL,
  localparam int unsigned CW     = $clog2(NCELLS + 1),
  localparam int unsigned WAW    = $clog2(WL),
  localparam int unsigned SAW    = (SSL > 1) ? $clog2(SSL) : 1,
  localparam int unsigned BAW    = (BLOCKS > 1) ? $clog2(BLOCKS) : 1,
  localparam int unsigned MW     = $clog2(MAXM + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [MW-1:0]   log2m_in,
  output logic            busy,
  output logic            done,
  // array side
  output logic            read_en,
  output logic [BAW-1:0]  block,
  output logic [SAW-1:0]  ssl,
  output logic [WAW-1:0]  wl_addr,
  output logic [CW-1:0]   cell_base,
  output logic [MW-1:0]   log2m,
  output chk_t            chk,
  input  logic            sense_valid,
  // transfer and scoring
  output logic            xfer_start,
  output logic            first,
  input  logic            xfer_done,
  output logic            drain_start,
  input  logic            drain_done
);

  typedef enum logic [2:0] {
    S_IDLE, S_READ, S_SENSE, S_XFER, S_XWAIT, S_DRAIN, S_DWAIT
  } state_t;

  state_t state;
  logic [BAW-1:0] part;
  logic [WAW:0]   sub;      // subset index within the part

  // Subsets in the current part: ceil(cells_in_part / m).
  int unsigned cells_in_part, nsub;
  always_comb begin
    cells_in_part = NCELLS - int'(part) * WL;
    if (cells_in_part > WL) cells_in_part = WL;
    nsub = (cells_in_part + (32'd1 << log2m) - 1) >> log2m;
  end

  assign block       = part;
  assign wl_addr     = WAW'(int'(sub) << log2m);
  assign cell_base   = CW'(int'(part) * WL + (int'(sub) << log2m));
  assign busy        = (state != S_IDLE);
  assign read_en     = (state == S_READ);
  assign xfer_start  = (state == S_XFER);
  assign drain_start = (state == S_DRAIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      part  <= '0;
      sub   <= '0;
      ssl   <= '0;
      chk   <= CHK_UBC;
      first <= 1'b0;
      log2m <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          log2m <= log2m_in;
          ssl   <= '0;
          part  <= '0;
          sub   <= '0;
          chk   <= CHK_UBC;
          first <= 1'b1;
          state <= S_READ;
        end
        S_READ:  state <= S_SENSE;
        S_SENSE: if (sense_valid) state <= S_XFER;
        S_XFER:  state <= S_XWAIT;
        S_XWAIT: if (xfer_done) begin
          first <= 1'b0;
          if (chk == CHK_UBC) begin
            chk   <= CHK_LBC;
            state <= S_READ;
          end else begin
            chk <= CHK_UBC;
            if (int'(sub) + 1 < nsub) begin
              sub   <= sub + 1'b1;
              state <= S_READ;
            end else if (int'(part) + 1 < NPARTS) begin
              part  <= part + 1'b1;
              sub   <= '0;
              state <= S_READ;
            end else begin
              state <= S_DRAIN;
            end
          end
        end
        S_DRAIN: state <= S_DWAIT;
        S_DWAIT: if (drain_done) begin
          if (int'(ssl) + 1 < SSL) begin
            ssl   <= ssl + 1'b1;
            part  <= '0;
            sub   <= '0;
            first <= 1'b1;
            state <= S_READ;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The folded hypervector must fit the blocks, and m the string and lanes.
  initial assert (NPARTS <= BLOCKS) else $fatal(1, "dbam_controller: NPARTS > BLOCKS");
  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && state == S_IDLE) |-> ((32'd1 << log2m_in) <= WL && (32'd1 << log2m_in) <= MAXM))
    else $error("dbam_controller: m larger than the string or the lane count");

endmodule
