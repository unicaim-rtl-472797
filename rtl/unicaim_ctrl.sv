// unicaim_ctrl: controller of the UniCAIM key cache.
//
// Prefill load: while no step runs, each pf_valid writes one heavy token into the next
// free row (rows 0, 1, ...), one write cycle each, up to H rows. Choosing which prompt
// tokens are heavy (the one-shot static pruning of the prefill stage) happens before,
// outside this macro.
// Decoding step (step_valid accepted in IDLE), phases in order:
//   WRITE  - the new key is written: into the row evicted in an earlier step if one is
//            pending, else into the next free reserved row; its accumulator is reset.
//   CAM    - CAM-mode top-k race with the query on the bit lines (cam_start/cam_done).
//   SHARE  - one clock with S1 closed: SL charge is shared into the accumulators.
//   STATIC - only once all H+M rows hold tokens: discharge race picks the row with the
//            lowest accumulated score (evict_start/evict_done); that row is kept as the
//            pending eviction and is overwritten by the next step's key.
//   ATTN   - current-domain CIM converts the top-k rows (adc_start/adc_done).
//   DONE   - step_done pulses for one clock.
// The order follows the paper (top-k, then charge sharing and eviction in the same
// operation cycle, exact attention, and the evicted row overwritten by the new key). The
// handshakes, the write-first order within a step (so the current token's key takes
// part in its own step) and the pending-eviction register are this design's choices.
module unicaim_ctrl
  import unicaim_pkg::*;
#(
  parameter int unsigned N  = N_ROWS,
  parameter int unsigned H  = H_TOKENS,
  parameter int unsigned AW = $clog2(N),
  parameter int unsigned CW = $clog2(N + 1)
)(
  input  logic          clk,
  input  logic          rst_n,
  // prefill load
  input  logic          pf_valid,
  output logic          pf_ready,
  // decoding step
  input  logic          step_valid,
  output logic          step_ready,
  output logic          step_done,
  // array access
  output logic          wr,
  output logic [AW-1:0] wr_addr,
  output logic          rd_en,
  output logic [N-1:0]  row_valid,
  // CAM mode
  output logic          cam_start,
  input  logic          cam_done,
  // charge-domain mode
  output logic          share,
  output logic          acc_init_en,
  output logic [AW-1:0] acc_init_addr,
  output logic          evict_start,
  input  logic          evict_done,
  input  logic          evict_valid,
  input  logic [AW-1:0] evict_addr,
  // current-domain mode
  output logic          adc_start,
  input  logic          adc_done,
  // status
  output phase_t        phase,
  output logic [CW-1:0] fill,
  output logic          full,
  output logic          pending,
  output logic          step_evicted,
  output logic          step_reused
);
  logic          started;       // a phase's start pulse has been issued
  logic [AW-1:0] pend_addr;

  assign full       = (32'(fill) >= N);
  assign pf_ready   = (phase == PH_IDLE) && (32'(fill) < H);
  assign step_ready = (phase == PH_IDLE);

  always_comb begin
    wr            = 1'b0;
    wr_addr       = '0;
    acc_init_en   = 1'b0;
    acc_init_addr = '0;
    if (phase == PH_IDLE && pf_valid && pf_ready) begin
      wr      = 1'b1;
      wr_addr = AW'(fill);
    end else if (phase == PH_WRITE) begin
      wr      = pending || !full;
      wr_addr = pending ? pend_addr : AW'(fill);
    end
    acc_init_en   = wr;
    acc_init_addr = wr_addr;
    rd_en       = (phase == PH_CAM) || (phase == PH_SHARE) ||
                  (phase == PH_STATIC) || (phase == PH_ATTN);
    cam_start   = (phase == PH_CAM)    && !started;
    share       = (phase == PH_SHARE);
    evict_start = (phase == PH_STATIC) && !started;
    adc_start   = (phase == PH_ATTN)   && !started;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase        <= PH_IDLE;
      fill         <= '0;
      row_valid    <= '0;
      started      <= 1'b0;
      pending      <= 1'b0;
      pend_addr    <= '0;
      step_done    <= 1'b0;
      step_evicted <= 1'b0;
      step_reused  <= 1'b0;
    end else begin
      step_done <= 1'b0;
      case (phase)
        PH_IDLE: begin
          if (pf_valid && pf_ready) begin
            row_valid[fill[AW-1:0]] <= 1'b1;
            fill <= fill + 1'b1;
          end else if (step_valid) begin
            phase        <= PH_WRITE;
            step_evicted <= 1'b0;
            step_reused  <= 1'b0;
          end
        end
        PH_WRITE: begin
          if (pending) begin
            pending     <= 1'b0;
            step_reused <= 1'b1;
          end else if (!full) begin
            row_valid[fill[AW-1:0]] <= 1'b1;
            fill <= fill + 1'b1;
          end
          phase <= PH_CAM;
        end
        PH_CAM: begin
          started <= 1'b1;
          if (started && cam_done) begin
            started <= 1'b0;
            phase   <= PH_SHARE;
          end
        end
        PH_SHARE: phase <= full ? PH_STATIC : PH_ATTN;
        PH_STATIC: begin
          started <= 1'b1;
          if (started && evict_done) begin
            started      <= 1'b0;
            pending      <= evict_valid;
            pend_addr    <= evict_addr;
            step_evicted <= evict_valid;
            phase        <= PH_ATTN;
          end
        end
        PH_ATTN: begin
          started <= 1'b1;
          if (started && adc_done) begin
            started <= 1'b0;
            phase   <= PH_DONE;
          end
        end
        PH_DONE: begin
          step_done <= 1'b1;
          phase     <= PH_IDLE;
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  // A write never targets a row outside the array.
  a_wr_in_range: assert property (@(posedge clk) disable iff (!rst_n) wr |-> (32'(wr_addr) < N));
endmodule
