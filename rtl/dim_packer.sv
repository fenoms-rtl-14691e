// dim_packer: dimension packing of a binary hypervector for one m-subset.
//
// Dimension packing turns a D-bit hypervector into ceil(D/PF) multi-level
// values: cell c holds the number of ones among bits c*PF .. c*PF+PF-1
// (the last cell may cover fewer than PF bits). This module produces the
// packed values of MAXM consecutive cells starting at cell_base, which is
// what one m-subset read applies to the wordlines. Lane k is valid when
// k < m (m = 2**log2m) and cell_base+k is a real cell.
//
// Purely combinational. The packing rule (a sum of PF adjacent bits) and
// the default sizes D = 8192, PF = 3 are the paper's; producing one subset at
// a time from a held query register is this design's choice.
module dim_packer #(
  parameter int unsigned D     = 8192,
  parameter int unsigned PF    = 3,
  parameter int unsigned MAXM  = 16,
  localparam int unsigned NCELLS = (D + PF - 1) / PF,
  localparam int unsigned CW     = $clog2(NCELLS + 1),
  localparam int unsigned LW     = $clog2(PF + 1),
  localparam int unsigned MW     = $clog2(MAXM + 1)
) (
  input  logic [D-1:0]  hv,
  input  logic [CW-1:0] cell_base,
  input  logic [MW-1:0] log2m,
  output logic [LW-1:0] q      [MAXM],
  output logic          q_valid[MAXM]
);

  always_comb begin
    for (int unsigned k = 0; k < MAXM; k++) begin
      automatic int unsigned c_idx = int'(cell_base) + k;
      automatic logic [LW-1:0] sum = '0;
      for (int unsigned b = 0; b < PF; b++) begin
        automatic int unsigned bit_idx = c_idx * PF + b;
        if (bit_idx < D) sum = sum + LW'(hv[bit_idx]);
      end
      q[k]       = sum;
      q_valid[k] = (c_idx < NCELLS) && (k < (32'd1 << log2m));
    end
  end

endmodule
