// current_cim: current-domain CIM for exact attention of the top-k rows.
//
// The top-k MUX routes the sense-line currents of the rows in the top-k local register
// to K SAR ADCs, which convert them in parallel. Since a row's current is 4*D - score
// (see unicaim_pkg), each code is turned back into the signed attention score
// score = 4*D - code, in quarter steps (range -4*D..+4*D; with a 10-bit ADC and D = 128
// a row current of 1024, score -512, clips to -511).
// Interface: start (one clock) with sel and i_sl stable during the conversion; done
// pulses after B+1 clocks; score/addr/valid hold until the next start.
// The paper fixes the ADC count (64, one per top-k token) and resolution (10 bits); the
// code-to-score conversion follows from the cell current model of this design.
module current_cim
  import unicaim_pkg::*;
#(
  parameter int unsigned N  = N_ROWS,
  parameter int unsigned D  = D_DIM,
  parameter int unsigned K  = TOP_K,
  parameter int unsigned B  = ADC_BITS,
  parameter int unsigned IW = $clog2(8*D + 1),
  parameter int unsigned AW = $clog2(N)
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [N-1:0]         sel,
  input  logic [IW-1:0]        i_sl  [N],
  output logic                 done,
  output logic signed [IW:0]   score [K],
  output logic [AW-1:0]        addr  [K],
  output logic [K-1:0]         valid
);
  logic [IW-1:0] ch_i     [K];
  logic [AW-1:0] ch_addr  [K];
  logic [K-1:0]  ch_valid;
  logic [B-1:0]  code     [K];
  logic [K-1:0]  adc_done;

  topk_mux #(.N(N), .K(K), .IW(IW), .AW(AW)) u_mux (
    .sel     (sel),
    .i_sl    (i_sl),
    .ch_i    (ch_i),
    .ch_addr (ch_addr),
    .ch_valid(ch_valid)
  );

  for (genvar j = 0; j < K; j++) begin : g_adc
    sar_adc #(.B(B), .IW(IW)) u_adc (
      .clk  (clk),
      .rst_n(rst_n),
      .start(start),
      .vin  (ch_i[j]),
      .code (code[j]),
      .done (adc_done[j])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      for (int j = 0; j < K; j++) addr[j] <= '0;
    end else if (start) begin
      valid <= ch_valid;
      addr  <= ch_addr;
    end
  end

  always_comb begin
    for (int j = 0; j < K; j++)
      score[j] = (IW+1)'(int'(4*D) - int'(code[j]));
  end

  assign done = &adc_done;   // all channels convert in lock step
endmodule
