// local_register: row-selection register beside the UniCAIM array.
//
// Captures the row-selection vector (the rows whose detect transistor is on) on the
// clock edge where capture is high, i.e. when the comparator's control signal switches.
// It keeps it until the next capture or clear, and gives the number of selected rows and
// the address of the lowest selected row (first_addr, valid when count > 0).
// The paper says only that the selected addresses are stored in a local register; the
// mask form, the count and the lowest-index address are this design's choice.
module local_register #(
  parameter int unsigned N  = 576,
  parameter int unsigned AW = $clog2(N),
  parameter int unsigned CW = $clog2(N + 1)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          capture,
  input  logic [N-1:0]  sel_in,
  output logic [N-1:0]  sel,
  output logic [CW-1:0] count,
  output logic [AW-1:0] first_addr
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       sel <= '0;
    else if (clr)     sel <= '0;
    else if (capture) sel <= sel_in;
  end

  always_comb begin
    count      = '0;
    first_addr = '0;
    for (int r = N - 1; r >= 0; r--) begin
      if (sel[r]) first_addr = AW'(r);
    end
    for (int r = 0; r < N; r++) count = count + CW'(sel[r]);
  end
endmodule
