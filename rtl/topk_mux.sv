// topk_mux: the "N+1-to-k" multiplexer of the current-domain CIM.
//
// Routes the sense-line currents of the rows held in the top-k local register to the K
// ADC channels: channel j receives the j-th selected row in ascending row order, with
// its row address; channels left over (fewer than K rows selected) are grounded (switch
// S2, current 0) and flagged invalid. Selected rows beyond the K-th are not routed.
// Combinational. The paper gives the MUX only by name and function; the ascending
// packing is this design's choice, and the extra "+1" input printed in the paper's
// figure is not explained there and is not modelled.
module topk_mux #(
  parameter int unsigned N  = 576,
  parameter int unsigned K  = 64,
  parameter int unsigned IW = 11,
  parameter int unsigned AW = $clog2(N)
)(
  input  logic [N-1:0]  sel,
  input  logic [IW-1:0] i_sl     [N],
  output logic [IW-1:0] ch_i     [K],
  output logic [AW-1:0] ch_addr  [K],
  output logic [K-1:0]  ch_valid
);
  localparam int unsigned SW = $clog2(K + 1);
  logic [SW-1:0] slot;

  always_comb begin
    ch_valid = '0;
    for (int j = 0; j < K; j++) begin
      ch_i[j]    = '0;
      ch_addr[j] = '0;
    end
    slot = '0;
    for (int r = 0; r < N; r++) begin
      if (sel[r] && (32'(slot) < K)) begin
        ch_i[slot[$clog2(K)-1:0]]     = i_sl[r];
        ch_addr[slot[$clog2(K)-1:0]]  = AW'(r);
        ch_valid[slot[$clog2(K)-1:0]] = 1'b1;
        slot = slot + 1'b1;
      end
    end
  end
endmodule
