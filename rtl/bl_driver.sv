// bl_driver: bit-line driver of the UniCAIM array.
//
// Read (query) side: each dimension of the 1-bit signed query selects which bit line of
// the complementary pair carries the read voltage V_R: +1 -> (BL, BLb) = (0, V_R),
// -1 -> (V_R, 0), as in the paper's cell truth table. q_neg[c] = 1 means query -1.
// Bit lines are driven only while rd_en is high.
// Write side: each signed key dimension (quarter steps, -4..+4, clamped) is mapped to the
// pair of program levels (VTH1, VTH1b) = (4-k, 4+k), the complementary multilevel
// encoding of the paper (e.g. +0.5 -> (V_L', V_H')).
// Combinational. The multilevel query expansion over four cells (an alternative
// configuration in the paper) is not built here.
module bl_driver
  import unicaim_pkg::*;
#(
  parameter int unsigned D = D_DIM
)(
  input  logic          rd_en,
  input  logic [D-1:0]  q_neg,
  input  key_t          key [D],
  output logic [D-1:0]  bl,
  output logic [D-1:0]  blb,
  output cell_prog_t    prog [D]
);
  always_comb begin
    for (int c = 0; c < D; c++) begin
      bl[c]   = rd_en &  q_neg[c];
      blb[c]  = rd_en & ~q_neg[c];
      prog[c] = key_to_prog(key[c]);
    end
  end
endmodule
