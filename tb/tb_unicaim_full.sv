// tb_unicaim_full: end-to-end test of the UniCAIM key cache at its full default size
// (H = 512 heavy rows, M = 64 reserved rows, D = 128, k = K = 64 ADCs of 10 bits), the
// top instantiated with no parameter overrides. Same procedure and reference model as
// tb_unicaim_top, with M + 8 decoding steps so that the cache fills and evicts.
// H random keys are loaded as the prefill result, then S decoding steps run, each with a
// random +-1 query and a random new key. A reference model, written from the algorithm
// and not from the RTL, keeps the keys, the valid rows and the accumulators, and for each
// step predicts:
//   - the row written (next free row, or the row evicted in the previous step),
//   - the top-k set: with valid-row currents sorted ascending c[0..], all rows when at
//     most k are valid, else the rows with current < c[k] (i = 4*D - q.k),
//   - the accumulators after charge sharing, acc += floor((8*D - i - acc)/4),
//   - once full, the evicted row (eviction race, see tb_charge_cim) and the discharge,
//   - the attention outputs: selected rows ascending, score = 4*D - min(i, 2^B - 1).
// It counts the mechanisms - prefill writes, reserved-row writes, top-k selections,
// boundary ties (fewer than k selected), evictions, in-place overwrites, ADC clipping -
// and fails if any of the first six never happened.
module tb_unicaim_full;
  import unicaim_pkg::*;
  localparam int H = H_TOKENS, M = M_TOKENS, D = D_DIM, K = TOP_K, B = ADC_BITS;
  localparam int S = M + 8;
  localparam int N = H + M, IW = $clog2(8*D + 1), AW = $clog2(N), CW = $clog2(N + 1);
  localparam int VS = 2*D, INIT = 4*D;

  logic clk = 0, rst_n;
  logic [CW-1:0] k_cfg;
  logic pf_valid, pf_ready, step_valid, step_ready, step_done;
  key_t pf_key [D];
  key_t step_key [D];
  logic [D-1:0] step_q_neg;
  logic [K-1:0] attn_valid;
  logic [AW-1:0] attn_addr [K];
  logic signed [IW:0] attn_score [K];
  logic [CW-1:0] topk_count;
  logic step_evicted, step_reused, full;
  logic [AW-1:0] evict_addr;
  phase_t phase;

  unicaim_top dut (.*);

  always #5 clk = ~clk;

  // reference state
  int rkey [N][D];
  bit rvalid [N];
  int racc [N];
  int rfill, rpend, rpaddr;
  int checks = 0, failures = 0;
  int n_prefill = 0, n_reserved = 0, n_topk = 0, n_ties = 0, n_evict = 0, n_reuse = 0, n_clip = 0;
  longint cycles;

  always @(posedge clk) cycles <= cycles + 1;

  initial begin
    #500000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run_step(int s);
    int qv [D], cur [N], c[$], sel [N], target, thr, nvalid, m, t, ev, j, kk, sc, ci;
    longint t0;
    @(negedge clk);
    for (int d = 0; d < D; d++) begin
      step_q_neg[d] = 1'($urandom);
      qv[d] = step_q_neg[d] ? -1 : 1;
      step_key[d] = key_t'(int'($urandom % 9) - 4);
    end
    step_valid = 1;
    t0 = cycles;
    @(negedge clk);
    step_valid = 0;
    // reference: write
    if (rpend) begin target = rpaddr; rpend = 0; n_reuse++; end
    else begin target = rfill; rfill++; n_reserved++; end
    for (int d = 0; d < D; d++) rkey[target][d] = int'(step_key[d]);
    rvalid[target] = 1;
    racc[target] = INIT;
    // reference: currents and top-k
    c = {};
    for (int r = 0; r < N; r++) begin
      int sdot;
      sdot = 0;
      for (int d = 0; d < D; d++) sdot += qv[d] * rkey[r][d];
      cur[r] = 4*D - sdot;
      if (rvalid[r]) c.push_back(cur[r]);
    end
    c.sort();
    nvalid = c.size();
    kk = K;
    thr = (nvalid <= kk) ? 8*D + 1 : c[kk];
    for (int r = 0; r < N; r++) sel[r] = rvalid[r] && (cur[r] < thr);
    // reference: charge sharing
    for (int r = 0; r < N; r++)
      if (rvalid[r]) racc[r] = racc[r] + ((8*D - cur[r] - racc[r]) >>> 2);
    // reference: static eviction once full
    ev = -1;
    if (rfill == N) begin
      m = 1 << 30;
      for (int r = 0; r < N; r++) if (rvalid[r] && racc[r] < m) m = racc[r];
      t = (m > VS) ? m - VS : 0;
      for (int r = N - 1; r >= 0; r--) if (rvalid[r] && racc[r] <= VS + t) ev = r;
      for (int r = 0; r < N; r++) racc[r] = (racc[r] > t) ? racc[r] - t : 0;
      rpend = 1; rpaddr = ev; n_evict++;
    end
    // wait for the DUT
    while (!step_done && cycles - t0 < 10000) @(negedge clk);
    expect_true(step_done, $sformatf("step %0d finished", s));
    // compare
    j = 0;
    for (int r = 0; r < N; r++) if (sel[r]) j++;
    if (j < K && nvalid > K) n_ties++;
    n_topk++;
    expect_true(int'(topk_count) == j, $sformatf("step %0d top-k count %0d exp %0d", s, topk_count, j));
    j = 0;
    for (int r = 0; r < N; r++) begin
      if (sel[r] && j < K) begin
        ci = (cur[r] > (1 << B) - 1) ? (1 << B) - 1 : cur[r];
        if (ci != cur[r]) n_clip++;
        sc = 4*D - ci;
        expect_true(attn_valid[j] && int'(attn_addr[j]) == r && int'(attn_score[j]) == sc,
                    $sformatf("step %0d ch%0d addr %0d/%0d score %0d/%0d", s, j, attn_addr[j], r, attn_score[j], sc));
        j++;
      end
    end
    for (; j < K; j++) expect_true(!attn_valid[j], $sformatf("step %0d ch%0d idle", s, j));
    expect_true(step_evicted == (ev >= 0), $sformatf("step %0d eviction flag", s));
    if (ev >= 0) expect_true(int'(evict_addr) == ev, $sformatf("step %0d evicted %0d exp %0d", s, evict_addr, ev));
  endtask

  initial begin
    cycles = 0;
    rst_n = 0; pf_valid = 0; step_valid = 0; k_cfg = CW'(K);
    step_q_neg = '0;
    for (int d = 0; d < D; d++) begin pf_key[d] = '0; step_key[d] = '0; end
    for (int r = 0; r < N; r++) begin rvalid[r] = 0; racc[r] = INIT; end
    rfill = 0; rpend = 0; rpaddr = 0;
    #22 rst_n = 1;
    // prefill: load H heavy keys
    for (int r = 0; r < H; r++) begin
      @(negedge clk);
      pf_valid = 1;
      for (int d = 0; d < D; d++) begin
        pf_key[d] = key_t'(int'($urandom % 9) - 4);
        rkey[r][d] = int'(pf_key[d]);
      end
      #1;
      expect_true(pf_ready, "pf_ready during prefill");
      @(negedge clk);
      pf_valid = 0;
      rvalid[r] = 1; rfill++; n_prefill++;
    end
    for (int s = 0; s < S; s++) run_step(s);
    $display("mechanisms: prefill=%0d reserved=%0d topk=%0d ties=%0d evict=%0d reuse=%0d clip=%0d",
             n_prefill, n_reserved, n_topk, n_ties, n_evict, n_reuse, n_clip);
    expect_true(n_prefill > 0, "prefill happened");
    expect_true(n_reserved > 0, "reserved-row write happened");
    expect_true(n_topk > 0, "top-k selection happened");
    expect_true(n_ties > 0, "boundary tie happened");
    expect_true(n_evict > 0, "static eviction happened");
    expect_true(n_reuse > 0, "in-place overwrite happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
