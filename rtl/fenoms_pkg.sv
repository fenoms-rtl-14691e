// fenoms_pkg: types and constants shared by the D-BAM search datapath.
//
// Wordline biases are carried as digital codes in units of half a storage
// level: a cell programmed to level r has threshold code 2*r, and a wordline
// driven with code v turns the cell on when v >= 2*r. Half-level resolution
// is the finest the tolerance needs, since the margins studied for the
// design are 0.5, 1.5 and 2.5 levels. The pass voltage, which turns on every
// cell whatever it stores, is the largest code. This encoding is a choice of
// this design; the analog voltages themselves are outside the RTL.
package fenoms_pkg;

  // Signed wordline bias code, in half storage levels.
  typedef logic signed [7:0] vcode_t;

  localparam vcode_t VPASS = 8'sd127;

  // The two sensing operations of D-BAM.
  typedef enum logic {
    CHK_UBC = 1'b0,   // upper bound check: bias q + alpha_pos, current = pass
    CHK_LBC = 1'b1    // lower bound check: bias q - alpha_neg, no current = pass
  } chk_t;

endpackage
