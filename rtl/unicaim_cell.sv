// unicaim_cell: behavioural model of one FeFET-based UniCAIM cell (two 1T1F units).
//
// This is a behavioural model of an analog part: the two FeFETs F1/F1b are represented by
// their programmed VTH level indices and their drain currents by integer units. In a read
// the word line turns on both access transistors, so the bit-line voltages reach the FeFET
// gates. A query of +1 puts (0, V_R) on (BL1, BL1b), a query of -1 puts (V_R, 0) (paper's
// truth table); the FeFET whose gate sees V_R conducts 8 - level units onto the sense line.
// Resulting cell currents: key*query = +1 -> 0 units (I_+1), 0 -> 4 units (I_0),
// -1 -> 8 units (I_-1), and in between in quarter steps for the multilevel keys. The
// linear current scale is this design's choice; the ordering is the paper's.
//
// Interface: vth1/vth1b are the stored levels, bl/blb say which bit line carries the read
// voltage, i_sl is the cell's sense-line current in units (0..16 if both lines were
// driven, 0..8 for a legal query). Purely combinational.
module unicaim_cell
  import unicaim_pkg::*;
(
  input  vth_t       vth1,
  input  vth_t       vth1b,
  input  logic       bl,     // read voltage on BL1
  input  logic       blb,    // read voltage on BL1b
  output logic [4:0] i_sl
);
  logic [3:0] i1, i1b;

  always_comb begin
    i1   = (bl  && vth1  <= vth_t'(VTH_MAX)) ? 4'(VTH_MAX - 32'(vth1))  : 4'd0;
    i1b  = (blb && vth1b <= vth_t'(VTH_MAX)) ? 4'(VTH_MAX - 32'(vth1b)) : 4'd0;
    i_sl = 5'(i1) + 5'(i1b);
  end
endmodule
