// cam_topk: behavioural model of the CAM-mode top-k selection periphery (one slice per
// row: P_SL precharge transistor, buffer, detect FeFET F_dyn; shared: comparator CMP1
// against I_Ref1 and the local register).
//
// This is a behavioural model of a mixed-signal circuit. In the paper all sense lines are
// precharged to V_DD, the query is put on the bit lines, and each SL discharges with its
// cell current I_SL. A row whose SL falls below V_DD/2 switches its buffer output V_Dyn
// low and turns its F_dyn off; every row still high adds I_dyn to I_1. I_Ref1 is set to
// (k+1)*I_dyn, so when only k rows are left the comparator output Ctrl1 switches, stops
// the discharge and the surviving rows are stored in the local register.
//
// Model of the race: a row's crossing time is proportional to 1/I_SL, so rows cross in
// order of decreasing current. One clock here is one current level of that order: in
// evaluation clock t a row with i_sl >= 8*D+1-t has crossed. The number of rows still
// high is compared with k_cfg; when it is k_cfg or fewer, Ctrl1 is asserted and those
// rows are captured. Rows with equal current cross together, so, as in the circuit,
// fewer than k rows are selected when a tie straddles the boundary.
// Rows with row_en low hold no token and are not precharged (never selected).
//
// Timing: start (one clock) -> one precharge clock -> at most 8*D+1 evaluation clocks;
// done pulses for one clock in the clock after capture, sel/sel_count are then valid
// until the next start. k_cfg is sampled throughout evaluation (F_dyn programming).
module cam_topk
  import unicaim_pkg::*;
#(
  parameter int unsigned N  = N_ROWS,
  parameter int unsigned D  = D_DIM,
  parameter int unsigned IW = $clog2(8*D + 1),
  parameter int unsigned CW = $clog2(N + 1),
  parameter int unsigned AW = $clog2(N)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [CW-1:0] k_cfg,
  input  logic [N-1:0]  row_en,
  input  logic [IW-1:0] i_sl [N],
  output logic          busy,
  output logic          done,
  output logic          ctrl1,
  output logic [N-1:0]  sel,
  output logic [CW-1:0] sel_count
);
  typedef enum logic [1:0] {S_IDLE, S_PRE, S_EVAL} state_t;
  state_t         state;
  logic [IW:0]    thr;          // current level at which rows have crossed V_DD/2
  logic [N-1:0]   v_dyn;        // buffer outputs: 1 = SL still above V_DD/2
  logic [CW-1:0]  i1;           // I_1 in units of I_dyn
  logic [AW-1:0]  unused_addr;

  always_comb begin
    i1 = '0;
    for (int r = 0; r < N; r++) begin
      v_dyn[r] = row_en[r] && ((IW+1)'(i_sl[r]) < thr);
      i1 = i1 + CW'(v_dyn[r]);
    end
    // CMP1: I_1 < I_Ref1 = (k+1) I_dyn
    ctrl1 = (state == S_EVAL) && (i1 < k_cfg + CW'(1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      thr   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) state <= S_PRE;
        S_PRE: begin                       // P_SL low: all SLs at V_DD
          thr   <= (IW+1)'(8*D + 1);
          state <= S_EVAL;
        end
        S_EVAL: begin
          if (ctrl1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            thr <= thr - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  local_register #(.N(N), .AW(AW), .CW(CW)) u_lreg (
    .clk       (clk),
    .rst_n     (rst_n),
    .clr       (start),
    .capture   (ctrl1),
    .sel_in    (v_dyn),
    .sel       (sel),
    .count     (sel_count),
    .first_addr(unused_addr)
  );
endmodule
