// tb_unicaim_ctrl: controller with N = 6 rows, H = 4 heavy rows. The three analog modes
// are replaced by responders that answer start with done a few clocks later; the
// eviction responder returns a random row. Checked against a model of the cache fill:
// prefill writes go to rows 0..3 and stop at H; each step writes once (next free row,
// or the row evicted in an earlier step), then runs CAM -> SHARE -> (STATIC only when
// all rows are filled) -> ATTN -> DONE in that order; step_evicted / step_reused flag
// the mechanisms.
module tb_unicaim_ctrl;
  import unicaim_pkg::*;
  localparam int N = 6, H = 4, AW = 3, CW = 3;
  logic clk = 0, rst_n;
  logic pf_valid, pf_ready, step_valid, step_ready, step_done;
  logic wr, rd_en, cam_start, cam_done, share, acc_init_en, evict_start, evict_done, evict_valid;
  logic adc_start, adc_done, full, pending, step_evicted, step_reused;
  logic [AW-1:0] wr_addr, acc_init_addr, evict_addr;
  logic [N-1:0]  row_valid;
  logic [CW-1:0] fill;
  phase_t        phase;
  int checks = 0, failures = 0;
  int cam_cnt = -1, ev_cnt = -1, adc_cnt = -1;

  unicaim_ctrl #(.N(N), .H(H), .AW(AW), .CW(CW)) dut (.*);

  always #5 clk = ~clk;

  // responders
  always_ff @(posedge clk) begin
    cam_done <= 0; evict_done <= 0; adc_done <= 0;
    if (cam_start) cam_cnt <= 3; else if (cam_cnt > 0) cam_cnt <= cam_cnt - 1;
    if (cam_cnt == 1) cam_done <= 1;
    if (evict_start) begin ev_cnt <= 2; evict_addr <= AW'($urandom % N); end
    else if (ev_cnt > 0) ev_cnt <= ev_cnt - 1;
    if (ev_cnt == 1) evict_done <= 1;
    if (adc_start) adc_cnt <= 2; else if (adc_cnt > 0) adc_cnt <= adc_cnt - 1;
    if (adc_cnt == 1) adc_done <= 1;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int mfill, mpend, maddr, n_ev, n_reuse;
    rst_n = 0; pf_valid = 0; step_valid = 0; evict_valid = 1; evict_addr = '0;
    cam_done = 0; evict_done = 0; adc_done = 0;
    mfill = 0; mpend = 0; maddr = 0; n_ev = 0; n_reuse = 0;
    #12 rst_n = 1;
    // prefill: try H+2 writes, only H may happen
    for (int i = 0; i < H + 2; i++) begin
      @(negedge clk);
      pf_valid = 1;
      #1;
      expect_true(pf_ready == (i < H), "pf_ready");
      if (i < H) expect_true(wr && int'(wr_addr) == i, "prefill write address");
      @(negedge clk);
      pf_valid = 0;
    end
    expect_true(int'(fill) == H && row_valid == N'((1 << H) - 1), "fill after prefill");
    mfill = H;
    // decoding steps
    for (int s = 0; s < 8; s++) begin
      phase_t seen[$];
      int target;
      bit did_static, reuse;
      @(negedge clk);
      step_valid = 1;
      @(negedge clk);
      step_valid = 0;
      target = mpend ? maddr : mfill;
      expect_true(phase == PH_WRITE && wr && int'(wr_addr) == target && acc_init_en &&
                  int'(acc_init_addr) == target, $sformatf("step %0d write to %0d (got %0d)", s, target, wr_addr));
      reuse = mpend;
      if (mpend) begin mpend = 0; n_reuse++; end else mfill++;
      seen = {};
      while (!step_done) begin
        if (seen.size() == 0 || seen[$] != phase) seen.push_back(phase);
        @(negedge clk);
      end
      did_static = 0;
      foreach (seen[i]) if (seen[i] == PH_STATIC) did_static = 1;
      expect_true(did_static == (mfill == N), $sformatf("static phase at step %0d", s));
      expect_true(seen[0] == PH_WRITE && seen[1] == PH_CAM && seen[2] == PH_SHARE &&
                  seen[$] == PH_DONE && seen[$-1] == PH_ATTN, "phase order");
      if (did_static) begin
        mpend = 1; maddr = int'(evict_addr); n_ev++;
        expect_true(step_evicted, "step_evicted");
      end
      expect_true(step_reused == reuse, "step_reused flag");
    end
    expect_true(n_ev > 0 && n_reuse > 0, "eviction and reuse both happened");
    $display("evictions=%0d reused_rows=%0d", n_ev, n_reuse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
