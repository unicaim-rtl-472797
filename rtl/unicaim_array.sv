// unicaim_array: behavioural model of the FeFET-based UniCAIM array (the key cache).
//
// This is a behavioural model of an analog, process-specific array. N rows (one token key
// each) by D columns (one UniCAIM cell per key dimension). Every row has one sense line;
// every column has a complementary bit-line pair shared by all rows.
//
// Write: with we high, every row whose word line is on takes the program levels on
// prog[] at the rising clock edge - one write cycle per key, as in the paper, so the new
// key overwrites an evicted row in place. The stored levels are non-volatile and have no
// reset.
// Read: every row whose word line is on sinks i_sl[r] = sum of its cells' currents
// (combinational). With a +-1 query on the bit lines, i_sl[r] = 4*D - score[r], where
// score[r] is the signed dot product of query and key in quarter steps.
//
// The row/column organisation, the shared bit lines and the single-cycle overwrite follow
// the paper; representing charge and current as integers is this model's choice.
module unicaim_array
  import unicaim_pkg::*;
#(
  parameter int unsigned N  = N_ROWS,
  parameter int unsigned D  = D_DIM,
  parameter int unsigned IW = $clog2(8*D + 1)
)(
  input  logic             clk,
  input  logic             we,
  input  logic [N-1:0]     wl,
  input  cell_prog_t       prog [D],
  input  logic [D-1:0]     bl,
  input  logic [D-1:0]     blb,
  output logic [IW-1:0]    i_sl [N]
);
  cell_prog_t mem [N][D];
  logic [4:0] i_cell [N][D];

  always_ff @(posedge clk) begin
    for (int r = 0; r < N; r++)
      if (we && wl[r])
        for (int c = 0; c < D; c++)
          mem[r][c] <= prog[c];
  end

  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar c = 0; c < D; c++) begin : g_col
      unicaim_cell u_cell (
        .vth1 (mem[r][c].vth1),
        .vth1b(mem[r][c].vth1b),
        .bl   (bl[c]),
        .blb  (blb[c]),
        .i_sl (i_cell[r][c])
      );
    end
  end

  always_comb begin
    for (int r = 0; r < N; r++) begin
      i_sl[r] = '0;
      if (!we && wl[r])
        for (int c = 0; c < D; c++)
          i_sl[r] = i_sl[r] + IW'(i_cell[r][c]);
    end
  end
endmodule
