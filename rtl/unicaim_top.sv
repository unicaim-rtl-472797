// unicaim_top: UniCAIM key-cache macro - a unified CAM / CIM array with static-dynamic KV
// cache pruning for the decoding stage of LLM attention.
//
// The array holds N = H + M token keys: H heavy tokens loaded after the prefill stage and
// M rows reserved for generated tokens. In every decoding step the same array works in
// three modes:
//   CAM mode            - a sense-line discharge race keeps the k rows most similar to
//                         the query (dynamic pruning, cam_topk);
//   charge-domain CIM   - the race's SL charge is added into per-row accumulators and,
//                         once all rows hold tokens, the row with the lowest accumulated
//                         score is chosen for eviction (static pruning, charge_cim);
//   current-domain CIM  - only the k selected rows are converted by k ADCs, giving their
//                         exact attention scores (current_cim).
// The next step's key overwrites the evicted row, so the cache never grows beyond N.
//
// Interface:
//   pf_valid/pf_ready/pf_key     - load one heavy key per clock into rows 0..H-1.
//   step_valid/step_ready        - start a decoding step with query step_q_neg (bit c = 1:
//                                  dimension c is -1, else +1) and new key step_key
//                                  (signed quarter steps, -4..+4 = -1..+1).
//   k_cfg                        - k of the top-k selection (I_Ref1 = (k+1) I_dyn); up to K
//                                  rows are converted.
//   step_done                    - one-clock pulse; attn_* then hold the step's result:
//                                  attn_valid[j], attn_addr[j] (row), attn_score[j] (q.k
//                                  in quarter steps) for ADC channel j.
//   topk_count, step_evicted, evict_addr, step_reused, full, phase - step status.
// Timing: a prefill write takes one clock; a step takes 1 write clock, up to 8*D+3 CAM
// clocks, 1 sharing clock, up to 8*D+2 eviction clocks (only when full) and B+2 ADC
// clocks, plus a few handshake clocks.
// The block structure and the three modes are the paper's; clocking, handshakes and the
// integer models of the analog parts are this design's.
module unicaim_top
  import unicaim_pkg::*;
#(
  parameter int unsigned H  = H_TOKENS,
  parameter int unsigned M  = M_TOKENS,
  parameter int unsigned D  = D_DIM,
  parameter int unsigned K  = TOP_K,
  parameter int unsigned B  = ADC_BITS,
  parameter int unsigned N  = H + M,
  parameter int unsigned IW = $clog2(8*D + 1),
  parameter int unsigned AW = $clog2(N),
  parameter int unsigned CW = $clog2(N + 1)
)(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [CW-1:0]       k_cfg,
  // prefill load
  input  logic                pf_valid,
  output logic                pf_ready,
  input  key_t                pf_key      [D],
  // decoding step
  input  logic                step_valid,
  output logic                step_ready,
  input  logic [D-1:0]        step_q_neg,
  input  key_t                step_key    [D],
  output logic                step_done,
  // results
  output logic [K-1:0]        attn_valid,
  output logic [AW-1:0]       attn_addr   [K],
  output logic signed [IW:0]  attn_score  [K],
  output logic [CW-1:0]       topk_count,
  output logic                step_evicted,
  output logic                step_reused,
  output logic [AW-1:0]       evict_addr,
  output logic                full,
  output phase_t              phase
);
  // step operands
  logic [D-1:0]  q_reg;
  key_t          key_reg [D];
  key_t          key_drv [D];

  // controller <-> datapath
  logic          wr, rd_en, cam_start, cam_done, share, acc_init_en;
  logic          evict_start, evict_done, evict_valid, adc_start, adc_done, pending;
  logic [AW-1:0] wr_addr, acc_init_addr;
  logic [N-1:0]  row_valid, wl, topk_sel;
  logic [CW-1:0] fill;
  logic [D-1:0]  bl, blb;
  cell_prog_t    prog [D];
  logic [IW-1:0] i_sl [N];
  logic [IW-1:0] v_acc [N];
  logic          cam_busy, cam_ctrl1, sta_busy, sta_ctrl2;

  always_ff @(posedge clk) begin
    if (phase == PH_IDLE && step_valid && !(pf_valid && pf_ready)) begin
      q_reg   <= step_q_neg;
      key_reg <= step_key;
    end
  end

  always_comb key_drv = (phase == PH_IDLE) ? pf_key : key_reg;

  unicaim_ctrl #(.N(N), .H(H), .AW(AW), .CW(CW)) u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .pf_valid     (pf_valid),
    .pf_ready     (pf_ready),
    .step_valid   (step_valid),
    .step_ready   (step_ready),
    .step_done    (step_done),
    .wr           (wr),
    .wr_addr      (wr_addr),
    .rd_en        (rd_en),
    .row_valid    (row_valid),
    .cam_start    (cam_start),
    .cam_done     (cam_done),
    .share        (share),
    .acc_init_en  (acc_init_en),
    .acc_init_addr(acc_init_addr),
    .evict_start  (evict_start),
    .evict_done   (evict_done),
    .evict_valid  (evict_valid),
    .evict_addr   (evict_addr),
    .adc_start    (adc_start),
    .adc_done     (adc_done),
    .phase        (phase),
    .fill         (fill),
    .full         (full),
    .pending      (pending),
    .step_evicted (step_evicted),
    .step_reused  (step_reused)
  );

  wl_driver #(.N(N), .AW(AW)) u_wl (
    .wr       (wr),
    .wr_addr  (wr_addr),
    .row_valid(row_valid),
    .wl       (wl)
  );

  bl_driver #(.D(D)) u_bl (
    .rd_en(rd_en),
    .q_neg(q_reg),
    .key  (key_drv),
    .bl   (bl),
    .blb  (blb),
    .prog (prog)
  );

  unicaim_array #(.N(N), .D(D), .IW(IW)) u_array (
    .clk (clk),
    .we  (wr),
    .wl  (wl),
    .prog(prog),
    .bl  (bl),
    .blb (blb),
    .i_sl(i_sl)
  );

  cam_topk #(.N(N), .D(D), .IW(IW), .CW(CW), .AW(AW)) u_cam (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (cam_start),
    .k_cfg    (k_cfg),
    .row_en   (row_valid),
    .i_sl     (i_sl),
    .busy     (cam_busy),
    .done     (cam_done),
    .ctrl1    (cam_ctrl1),
    .sel      (topk_sel),
    .sel_count(topk_count)
  );

  charge_cim #(.N(N), .D(D), .IW(IW), .AW(AW)) u_sta (
    .clk        (clk),
    .rst_n      (rst_n),
    .row_en     (row_valid),
    .i_sl       (i_sl),
    .share      (share),
    .init_all   (1'b0),
    .init_en    (acc_init_en),
    .init_addr  (acc_init_addr),
    .evict_start(evict_start),
    .busy       (sta_busy),
    .done       (evict_done),
    .ctrl2      (sta_ctrl2),
    .evict_addr (evict_addr),
    .evict_valid(evict_valid),
    .v_acc      (v_acc)
  );

  current_cim #(.N(N), .D(D), .K(K), .B(B), .IW(IW), .AW(AW)) u_cur (
    .clk  (clk),
    .rst_n(rst_n),
    .start(adc_start),
    .sel  (topk_sel),
    .i_sl (i_sl),
    .done (adc_done),
    .score(attn_score),
    .addr (attn_addr),
    .valid(attn_valid)
  );
endmodule
