// wl_decoder: wordline decoder extended to open m consecutive wordlines.
//
// A conventional NAND row decoder turns a wordline address into a one-hot
// select. D-BAM reads m wordlines of a string at once, so the decoder gets a
// control input log2m and ignores the log2m low address bits: every wordline
// whose high address bits equal those of wl_addr is selected. Each select is
// therefore the OR of the one-hot decodes of the addresses that differ only
// in the masked bits, which is the "few OR gates and control signals" the
// extension needs. Subsets are aligned to m, as the search sequence always
// steps wl_addr by m.
//
// Combinational. The multi-wordline extension is the paper's; the aligned
// masking scheme is this design's way of realising it.
module wl_decoder #(
  parameter int unsigned WL   = 32,
  parameter int unsigned MAXM = 16,
  localparam int unsigned AW  = $clog2(WL),
  localparam int unsigned MW  = $clog2(MAXM + 1)
) (
  input  logic          en,
  input  logic [AW-1:0] wl_addr,
  input  logic [MW-1:0] log2m,
  output logic [WL-1:0] wl_sel
);

  logic [AW-1:0] mask;   // address bits that are ignored (ones)
  logic [WL-1:0] onehot;

  always_comb begin
    mask   = AW'((32'd1 << log2m) - 1);
    onehot = '0;
    onehot[wl_addr] = 1'b1;
    for (int unsigned w = 0; w < WL; w++) begin
      // OR of the one-hot decodes that match wordline w outside the mask.
      wl_sel[w] = en && (((AW'(w)) & ~mask) == (wl_addr & ~mask));
    end
  end

  // The one-hot decode stays the reference for m = 1.
  always_comb
    if (en && log2m == '0) assert (wl_sel == onehot) else $error("wl_decoder: m=1 select is not one-hot");

endmodule
