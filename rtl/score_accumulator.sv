// score_accumulator: binary score counters of the external processor.
//
// Implements the D-BAM score (Eq. 4): every passed UBC and every passed LBC
// of an m-subset adds one to its reference's score. The counters are a RAM
// of ROWS = PLANES*COLS words, each word holding the IO_W counters of the
// IO_W references that one bus word from shared_io carries, so one bus word
// updates IO_W counters in one cycle (read, add the bits, write back). A
// word with in_first set overwrites instead of adding, which clears a
// reference group's scores on its first read without separate clear cycles.
//
// drain_start then walks all rows and lanes and hands out one score per
// cycle (cand_valid, cand_ref = plane*BL + bitline, cand_score), skipping the
// lanes past the last bitline; drain_done pulses after the last one. While
// draining, in_ready is low.
//
// Counting outside the memory with simple binary counters is the paper's;
// the RAM organisation, clear-on-first-write and the drain order are this
// design's choices.
module score_accumulator #(
  parameter int unsigned PLANES  = 23,
  parameter int unsigned BL      = 5462,
  parameter int unsigned IO_W    = 64,
  parameter int unsigned SCORE_W = 11,
  localparam int unsigned COLS   = (BL + IO_W - 1) / IO_W,
  localparam int unsigned ROWS   = PLANES * COLS,
  localparam int unsigned RAW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned LNW    = (IO_W > 1) ? $clog2(IO_W) : 1,
  localparam int unsigned REFW   = $clog2(PLANES * BL)
) (
  input  logic               clk,
  input  logic               rst_n,
  // result words from the shared I/O
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [RAW-1:0]     in_row,
  input  logic [IO_W-1:0]    in_bits,
  input  logic               in_first,
  // score read-out
  input  logic               drain_start,
  output logic               drain_busy,
  output logic               drain_done,
  output logic               cand_valid,
  output logic [REFW-1:0]    cand_ref,
  output logic [SCORE_W-1:0] cand_score
);

  typedef logic [IO_W-1:0][SCORE_W-1:0] row_t;

  row_t           cnt [ROWS];
  logic           draining;
  logic [RAW-1:0] d_row;
  logic [LNW-1:0] d_lane;

  assign in_ready   = !draining;
  assign drain_busy = draining;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      row_t old;
      row_t upd;
      old = cnt[in_row];
      for (int unsigned l = 0; l < IO_W; l++)
        upd[l] = (in_first ? '0 : old[l]) + SCORE_W'(in_bits[l]);
      cnt[in_row] <= upd;
    end
  end

  // Drain walk: one (row, lane) per cycle.
  logic last_pos;
  assign last_pos = (int'(d_row) == ROWS - 1) && (int'(d_lane) == IO_W - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      draining   <= 1'b0;
      d_row      <= '0;
      d_lane     <= '0;
      drain_done <= 1'b0;
    end else begin
      drain_done <= 1'b0;
      if (!draining) begin
        if (drain_start) begin
          draining <= 1'b1;
          d_row    <= '0;
          d_lane   <= '0;
        end
      end else if (last_pos) begin
        draining   <= 1'b0;
        drain_done <= 1'b1;
      end else if (int'(d_lane) == IO_W - 1) begin
        d_lane <= '0;
        d_row  <= d_row + 1'b1;
      end else begin
        d_lane <= d_lane + 1'b1;
      end
    end
  end

  always_comb begin
    automatic int unsigned plane = int'(d_row) / COLS;
    automatic int unsigned bl    = (int'(d_row) % COLS) * IO_W + int'(d_lane);
    cand_valid = draining && (bl < BL);
    cand_ref   = REFW'(plane * BL + bl);
    cand_score = cnt[d_row][d_lane];
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(drain_start && in_valid))
    else $error("score_accumulator: drain started during scoring");

endmodule
