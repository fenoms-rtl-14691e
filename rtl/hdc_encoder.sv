// hdc_encoder: ID-level hyperdimensional encoding of one spectrum.
//
// Eq. 1: every peak (m/z bin i, intensity level j) contributes the bitwise
// XOR of its ID hypervector I_i and level hypervector L_j; the encoded
// hypervector is the per-dimension majority over all peaks. The item
// hypervectors come from the host's item memory, streamed W bits per beat:
// a peak is D/W beats (in_id, in_lvl), dimension chunks in order 0..D/W-1.
// Each beat adds the W XOR bits to W per-dimension counters, a RAM of D/W
// words. After the last peak, finalize computes h[d] = (2*count[d] > peaks)
// over D/W cycles and then raises hv_valid with the binary hypervector hv.
// clear resets the counters' use (the first peak overwrites them), the peak
// count and hv_valid.
//
// XOR binding and majority bundling are the paper's; the streaming width
// W = 64, the counter width, the strict majority (a tie gives 0) and taking
// item vectors from outside are this design's choices.
module hdc_encoder #(
  parameter int unsigned D     = 8192,
  parameter int unsigned W     = 64,
  parameter int unsigned CNT_W = 8,
  localparam int unsigned NW   = D / W,
  localparam int unsigned WAW  = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           in_valid,
  input  logic [W-1:0]   in_id,
  input  logic [W-1:0]   in_lvl,
  input  logic           finalize,
  output logic           busy,
  output logic           hv_valid,
  output logic [D-1:0]   hv,
  output logic [CNT_W-1:0] peaks
);

  typedef logic [W-1:0][CNT_W-1:0] cword_t;

  cword_t         cnt [NW];
  logic [WAW-1:0] widx;
  logic           first_peak;   // counters not yet written since clear
  logic           fin;          // majority pass running

  assign busy = fin;

  always_ff @(posedge clk) begin
    if (!fin && in_valid && !clear) begin
      cword_t upd;
      for (int unsigned j = 0; j < W; j++)
        upd[j] = (first_peak ? '0 : cnt[widx][j]) + CNT_W'(in_id[j] ^ in_lvl[j]);
      cnt[widx] <= upd;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      widx       <= '0;
      peaks      <= '0;
      first_peak <= 1'b1;
      fin        <= 1'b0;
      hv_valid   <= 1'b0;
      hv         <= '0;
    end else if (clear) begin
      widx       <= '0;
      peaks      <= '0;
      first_peak <= 1'b1;
      fin        <= 1'b0;
      hv_valid   <= 1'b0;
    end else if (fin) begin
      for (int unsigned j = 0; j < W; j++)
        hv[int'(widx)*W + j] <= (peaks != 0) && (({1'b0, cnt[widx][j]} << 1) > {1'b0, peaks});
      if (int'(widx) == NW - 1) begin
        widx     <= '0;
        fin      <= 1'b0;
        hv_valid <= 1'b1;
      end else begin
        widx <= widx + 1'b1;
      end
    end else if (in_valid) begin
      hv_valid <= 1'b0;
      if (int'(widx) == NW - 1) begin
        widx       <= '0;
        peaks      <= peaks + 1'b1;
        first_peak <= 1'b0;
      end else begin
        widx <= widx + 1'b1;
      end
    end else if (finalize) begin
      fin  <= 1'b1;
      widx <= '0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(finalize && widx != '0 && !fin))
    else $error("hdc_encoder: finalize in the middle of a peak");

endmodule
