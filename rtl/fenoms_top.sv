// fenoms_top: in-storage open modification search with D-BAM on 3D FeNAND.
//
// The query spectrum is encoded into a binary hypervector (hdc_encoder),
// which stays in the encoder's output register for the whole search. The
// library sits in PLANES FeNAND planes (fenand_plane models) as packed
// reference hypervectors, folded over blocks. A search (search_start) runs
// dbam_controller: for every m-subset of the hypervector, dim_packer packs
// the m query cells, wl_decoder opens the m wordlines, dbam_wl_bias sets
// them to q+alpha_pos (UBC) or q-alpha_neg (LBC) and the other wordlines to
// the pass bias, and all planes read in parallel. Each plane's page buffer
// latches one pass bit per bitline; shared_io moves the pages off-chip
// IO_W bits a cycle to score_accumulator, whose counters add every passed
// check (Eq. 4). After the last subset of a string row the scores of its
// PLANES*BL references stream into topk_select; after the last string row
// search_done pulses and top_* hold the K best references, best first.
// A reference id is (string row * PLANES + plane) * BL + bitline.
//
// Interfaces: encoder stream (enc_*), page program port (prog_*, writing
// one wordline page of one plane), search control (search_*, log2m, margins
// in half levels). Programming and encoding must not overlap a search.
// Sizes default to the paper's main comparison configuration: D = 8192,
// PF3, 32 wordlines, 16 string rows, 128 blocks, 23 planes, 5462 bitlines,
// up to m = 16. The I/O width, read latency, K and encoder stream width are
// this design's choices.
module fenoms_top
  import fenoms_pkg::*;
#(
  parameter int unsigned D         = 8192,
  parameter int unsigned PF        = 3,
  parameter int unsigned WL        = 32,
  parameter int unsigned SSL       = 16,
  parameter int unsigned BLOCKS    = 128,
  parameter int unsigned PLANES    = 23,
  parameter int unsigned BL        = 5462,
  parameter int unsigned MAXM      = 16,
  parameter int unsigned IO_W      = 64,
  parameter int unsigned T_READ    = 4,
  parameter int unsigned K         = 4,
  parameter int unsigned ENC_W     = 64,
  parameter int unsigned ENC_CNT_W = 8,
  localparam int unsigned LW      = $clog2(PF + 1),
  localparam int unsigned NCELLS  = (D + PF - 1) / PF,
  localparam int unsigned CW      = $clog2(NCELLS + 1),
  localparam int unsigned SCORE_W = $clog2(2 * NCELLS + 1),
  localparam int unsigned IDW     = $clog2(SSL * PLANES * BL),
  localparam int unsigned REFW    = $clog2(PLANES * BL),
  localparam int unsigned COLS    = (BL + IO_W - 1) / IO_W,
  localparam int unsigned CAW     = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned ROWS    = PLANES * COLS,
  localparam int unsigned RAW     = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned WAW     = $clog2(WL),
  localparam int unsigned SAW     = (SSL > 1) ? $clog2(SSL) : 1,
  localparam int unsigned BAW     = (BLOCKS > 1) ? $clog2(BLOCKS) : 1,
  localparam int unsigned PAW     = (PLANES > 1) ? $clog2(PLANES) : 1,
  localparam int unsigned MW      = $clog2(MAXM + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // query encoding
  input  logic               enc_clear,
  input  logic               enc_valid,
  input  logic [ENC_W-1:0]   enc_id,
  input  logic [ENC_W-1:0]   enc_lvl,
  input  logic               enc_finalize,
  output logic               enc_busy,
  output logic               query_valid,
  // reference programming
  input  logic               prog_en,
  input  logic [PAW-1:0]     prog_plane,
  input  logic [BAW-1:0]     prog_block,
  input  logic [SAW-1:0]     prog_ssl,
  input  logic [WAW-1:0]     prog_wl,
  input  logic [BL*LW-1:0]   prog_data,
  // search
  input  logic               search_start,
  input  logic [MW-1:0]      log2m,
  input  logic [4:0]         alpha_pos_x2,
  input  logic [4:0]         alpha_neg_x2,
  output logic               search_busy,
  output logic               search_done,
  output logic               top_valid [K],
  output logic [IDW-1:0]     top_id    [K],
  output logic [SCORE_W-1:0] top_score [K]
);

  // ---------------- query encoding ----------------
  logic [D-1:0]         hv;
  logic [ENC_CNT_W-1:0] enc_peaks;

  hdc_encoder #(.D(D), .W(ENC_W), .CNT_W(ENC_CNT_W)) u_enc (
    .clk, .rst_n,
    .clear(enc_clear), .in_valid(enc_valid), .in_id(enc_id), .in_lvl(enc_lvl),
    .finalize(enc_finalize), .busy(enc_busy), .hv_valid(query_valid), .hv,
    .peaks(enc_peaks)
  );

  // ---------------- sequencing ----------------
  logic           read_en, xfer_start, xfer_done, drain_start, drain_done, first;
  logic [BAW-1:0] rd_block;
  logic [SAW-1:0] rd_ssl;
  logic [WAW-1:0] wl_addr;
  logic [CW-1:0]  cell_base;
  logic [MW-1:0]  cur_log2m;
  chk_t           chk;
  logic [PLANES-1:0] sense_valid;
  logic [4:0]     a_pos, a_neg;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      a_pos <= '0;
      a_neg <= '0;
    end else if (search_start && !search_busy) begin
      a_pos <= alpha_pos_x2;
      a_neg <= alpha_neg_x2;
    end

  dbam_controller #(.D(D), .PF(PF), .WL(WL), .SSL(SSL), .BLOCKS(BLOCKS), .MAXM(MAXM)) u_ctrl (
    .clk, .rst_n,
    .start(search_start), .log2m_in(log2m), .busy(search_busy), .done(search_done),
    .read_en, .block(rd_block), .ssl(rd_ssl), .wl_addr, .cell_base, .log2m(cur_log2m),
    .chk, .sense_valid(sense_valid[0]),
    .xfer_start, .first, .xfer_done, .drain_start, .drain_done
  );

  // ---------------- wordline path ----------------
  logic [LW-1:0] q       [MAXM];
  logic          q_valid [MAXM];
  logic [WL-1:0] wl_sel;
  vcode_t        wl_v    [WL];

  dim_packer #(.D(D), .PF(PF), .MAXM(MAXM)) u_pack (
    .hv, .cell_base, .log2m(cur_log2m), .q, .q_valid
  );

  wl_decoder #(.WL(WL), .MAXM(MAXM)) u_wldec (
    .en(read_en), .wl_addr, .log2m(cur_log2m), .wl_sel
  );

  dbam_wl_bias #(.WL(WL), .PF(PF), .MAXM(MAXM)) u_bias (
    .wl_sel, .log2m(cur_log2m), .chk, .alpha_pos_x2(a_pos), .alpha_neg_x2(a_neg),
    .q, .q_valid, .wl_v
  );

  // ---------------- planes and page buffers ----------------
  logic [IO_W-1:0] pb_dout [PLANES];
  logic [CAW-1:0]  col;

  for (genvar p = 0; p < PLANES; p++) begin : g_plane
    logic [BL-1:0] sense_bits;
    logic          busy;

    fenand_plane #(.WL(WL), .SSL(SSL), .BLOCKS(BLOCKS), .BL(BL), .PF(PF), .T_READ(T_READ)) u_plane (
      .clk, .rst_n,
      .prog_en(prog_en && int'(prog_plane) == p), .prog_block, .prog_ssl, .prog_wl, .prog_data,
      .read_en, .read_block(rd_block), .read_ssl(rd_ssl), .wl_v,
      .busy, .sense_valid(sense_valid[p]), .sense_bits
    );

    page_buffer #(.BL(BL), .IO_W(IO_W)) u_pb (
      .clk, .rst_n, .load(sense_valid[p]), .chk, .sense_bits, .col, .dout(pb_dout[p])
    );
  end

  // ---------------- off-chip transfer and scoring ----------------
  logic            io_valid, io_ready, io_busy;
  logic [RAW-1:0]  io_row;
  logic [IO_W-1:0] io_data;

  shared_io #(.PLANES(PLANES), .BL(BL), .IO_W(IO_W)) u_io (
    .clk, .rst_n, .start(xfer_start), .busy(io_busy), .done(xfer_done),
    .col, .pb_dout,
    .out_valid(io_valid), .out_ready(io_ready), .out_row(io_row), .out_data(io_data)
  );

  logic               cand_valid, drain_busy;
  logic [REFW-1:0]    cand_ref;
  logic [SCORE_W-1:0] cand_score;

  score_accumulator #(.PLANES(PLANES), .BL(BL), .IO_W(IO_W), .SCORE_W(SCORE_W)) u_acc (
    .clk, .rst_n,
    .in_valid(io_valid), .in_ready(io_ready), .in_row(io_row), .in_bits(io_data), .in_first(first),
    .drain_start, .drain_busy, .drain_done, .cand_valid, .cand_ref, .cand_score
  );

  topk_select #(.K(K), .IDW(IDW), .SCORE_W(SCORE_W)) u_topk (
    .clk, .rst_n, .clear(search_start && !search_busy),
    .cand_valid, .cand_id(IDW'(int'(rd_ssl) * PLANES * BL + int'(cand_ref))), .cand_score,
    .top_valid, .top_id, .top_score
  );

  assert property (@(posedge clk) disable iff (!rst_n)
                   !(search_busy && (enc_valid || enc_finalize || prog_en)))
    else $error("fenoms_top: query or library changed during a search");

endmodule
