// charge_cim: behavioural model of the charge-domain CIM periphery used for static
// pruning (one slice per row: switch S1, accumulate capacitor C_Acc, discharge
// transistor, FeFET inverter FE-INV and detect FeFET F_sta; shared: comparator CMP2
// against I_Ref2 = I_sta and the local register).
//
// This is a behavioural model of a mixed-signal circuit; voltages are integers in
// 0..8*D with V_DD = 8*D.
// Charge sharing (share, one clock): after the CAM race each SL holds a voltage that
// rises with the row's score; closing S1 shares it with C_Acc, which holds the running
// accumulation of earlier steps: V_Acc <- V_Acc + (V_SL - V_Acc) * C_SL/(C_SL+C_Acc).
// The frozen SL voltage is modelled as V_SL = 8*D - i_sl (= 4*D + score, V_DD/2 for a
// zero score) and the capacitor ratio as 2^-CAP_SHIFT; both are this design's choices.
// Eviction race (evict_start): all accumulators discharge at the same rate, DIS_STEP per
// clock. The first to reach the FE-INV switching voltage V_S (the smallest
// accumulation) flips its inverter, turns F_sta on and makes I_2 >= I_Ref2, so Ctrl2
// switches, turns the discharge off and the row is stored in the local register. The
// accumulators keep the discharged value, as the paper's waveforms show. Ties resolve to
// the lowest row index.
// init_en resets one row's accumulator to ACC_INIT (V_DD/2) when a new key is written
// there; init_all resets every row.
//
// Timing: share takes one clock. evict_start -> at most 8*D+1 race clocks; done pulses
// one clock after capture, evict_addr (with evict_valid) holds until the next evict_start.
module charge_cim
  import unicaim_pkg::*;
#(
  parameter int unsigned N         = N_ROWS,
  parameter int unsigned D         = D_DIM,
  parameter int unsigned IW        = $clog2(8*D + 1),
  parameter int unsigned AW        = $clog2(N),
  parameter int unsigned CAP_SHIFT = 2,
  parameter int unsigned VS        = 2*D,   // FE-INV switching voltage, 0.25 V_DD
  parameter int unsigned ACC_INIT  = 4*D,   // 0.5 V_DD
  parameter int unsigned DIS_STEP  = 1
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  row_en,
  input  logic [IW-1:0] i_sl [N],
  input  logic          share,
  input  logic          init_all,
  input  logic          init_en,
  input  logic [AW-1:0] init_addr,
  input  logic          evict_start,
  output logic          busy,
  output logic          done,
  output logic          ctrl2,
  output logic [AW-1:0] evict_addr,
  output logic          evict_valid,
  output logic [IW-1:0] v_acc [N]
);
  localparam int unsigned CW = $clog2(N + 1);
  logic         racing;
  logic [IW:0]  t_drop;           // total discharge so far
  logic [N-1:0] v_sta;            // FE-INV outputs: 1 = accumulator at or below V_S
  logic [N-1:0] sel_unused;
  logic [CW-1:0] evict_cnt;

  always_comb begin
    for (int r = 0; r < N; r++)
      v_sta[r] = row_en[r] && ((IW+1)'(v_acc[r]) <= (IW+1)'(VS) + t_drop);
    ctrl2 = racing && (v_sta != '0);   // CMP2: I_2 >= I_Ref2 = I_sta
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      racing <= 1'b0;
      t_drop <= '0;
      done   <= 1'b0;
      for (int r = 0; r < N; r++) v_acc[r] <= IW'(ACC_INIT);
    end else begin
      done <= 1'b0;
      if (init_all) begin
        for (int r = 0; r < N; r++) v_acc[r] <= IW'(ACC_INIT);
      end else if (share) begin
        for (int r = 0; r < N; r++)
          if (row_en[r]) begin
            automatic int signed v_sl  = int'(8*D) - int'(i_sl[r]);
            automatic int signed delta = v_sl - int'(v_acc[r]);
            v_acc[r] <= IW'(int'(v_acc[r]) + (delta >>> CAP_SHIFT));
          end
      end else if (evict_start) begin
        racing <= 1'b1;
        t_drop <= '0;
      end else if (racing) begin
        if (ctrl2) begin
          racing <= 1'b0;
          done   <= 1'b1;
          for (int r = 0; r < N; r++)
            v_acc[r] <= ((IW+1)'(v_acc[r]) > t_drop) ? IW'((IW+1)'(v_acc[r]) - t_drop) : '0;
        end else if (t_drop < (IW+1)'(8*D)) begin
          t_drop <= t_drop + (IW+1)'(DIS_STEP);
        end else begin
          racing <= 1'b0;            // nothing valid to evict
          done   <= 1'b1;
        end
      end
      if (init_en && !init_all) v_acc[init_addr] <= IW'(ACC_INIT);
    end
  end

  assign busy        = racing;
  assign evict_valid = (evict_cnt != '0);

  local_register #(.N(N), .AW(AW), .CW(CW)) u_lreg (
    .clk       (clk),
    .rst_n     (rst_n),
    .clr       (evict_start),
    .capture   (ctrl2),
    .sel_in    (v_sta),
    .sel       (sel_unused),
    .count     (evict_cnt),
    .first_addr(evict_addr)
  );
endmodule
