// wl_driver: word-line driver of the UniCAIM array.
//
// In a write (wr = 1) it decodes wr_addr to a one-hot word-line vector, so exactly one
// row is programmed. In a read (CAM / charge-domain / current-domain modes) it turns on
// the word lines of all rows that hold a token (row_valid), so all of them evaluate the
// query in parallel. An address beyond the last row selects nothing.
// Combinational. The paper only names this driver; decoding and read gating are this
// design's choice.
module wl_driver #(
  parameter int unsigned N  = 576,
  parameter int unsigned AW = $clog2(N)
)(
  input  logic          wr,
  input  logic [AW-1:0] wr_addr,
  input  logic [N-1:0]  row_valid,
  output logic [N-1:0]  wl
);
  always_comb begin
    wl = '0;
    if (wr) begin
      for (int r = 0; r < N; r++)
        wl[r] = (32'(wr_addr) == r);
    end else begin
      wl = row_valid;
    end
  end
endmodule
