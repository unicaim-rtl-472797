// tb_charge_cim: charge-domain CIM with N = 8 rows, D = 8 (V_DD = 64, V_S = 16, initial
// accumulator 32, sharing ratio 1/4). A reference model keeps every accumulator:
// share: acc += floor((64 - i_sl - acc) / 4) on valid rows; eviction: with m the smallest
// valid accumulator, the race lasts t = max(0, m - 16) clocks, the evicted row is the
// lowest-index valid row with acc <= 16 + t, and every accumulator then loses t (floor
// 0). A freshly written row is reset to 32. Accumulators, the evicted address and the race
// length (start -> done = t + 2 clocks) are checked.
module tb_charge_cim;
  localparam int N = 8, D = 8, IW = $clog2(8*D + 1), AW = 3;
  localparam int VS = 2*D, INIT = 4*D;
  logic clk = 0, rst_n, share, init_all, init_en, evict_start;
  logic [AW-1:0] init_addr, evict_addr;
  logic [N-1:0]  row_en;
  logic [IW-1:0] i_sl [N];
  logic [IW-1:0] v_acc [N];
  logic busy, done, ctrl2, evict_valid;
  int acc [N];
  int checks = 0, failures = 0, evictions = 0;

  charge_cim #(.N(N), .D(D), .IW(IW), .AW(AW)) dut (
    .clk(clk), .rst_n(rst_n), .row_en(row_en), .i_sl(i_sl), .share(share),
    .init_all(init_all), .init_en(init_en), .init_addr(init_addr), .evict_start(evict_start),
    .busy(busy), .done(done), .ctrl2(ctrl2), .evict_addr(evict_addr), .evict_valid(evict_valid),
    .v_acc(v_acc));

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp_acc(string what);
    for (int r = 0; r < N; r++) begin
      checks++;
      if (int'(v_acc[r]) != acc[r]) begin
        failures++;
        $display("FAIL %s row %0d acc=%0d exp=%0d", what, r, v_acc[r], acc[r]);
      end
    end
  endtask

  initial begin
    rst_n = 0; share = 0; init_all = 0; init_en = 0; evict_start = 0; init_addr = '0;
    row_en = '1;
    for (int r = 0; r < N; r++) begin i_sl[r] = '0; acc[r] = INIT; end
    #12 rst_n = 1;
    for (int it = 0; it < 150; it++) begin
      // one share
      @(negedge clk);
      row_en = (it % 3 == 0) ? N'($urandom) | N'(1) : '1;
      for (int r = 0; r < N; r++) i_sl[r] = IW'($urandom % (8*D + 1));
      share = 1;
      init_en = (it % 5 == 0);
      init_addr = AW'($urandom);
      for (int r = 0; r < N; r++)
        if (row_en[r]) acc[r] = acc[r] + ((64 - int'(i_sl[r]) - acc[r]) >>> 2);
      if (init_en) acc[init_addr] = INIT;
      @(negedge clk);
      share = 0; init_en = 0;
      cmp_acc("share");
      // eviction race every other step
      if (it % 2 == 1) begin
        int m, t, ev, lat;
        m = 1 << 30;
        for (int r = 0; r < N; r++) if (row_en[r] && acc[r] < m) m = acc[r];
        t = (m > VS) ? m - VS : 0;
        ev = -1;
        for (int r = N - 1; r >= 0; r--) if (row_en[r] && acc[r] <= VS + t) ev = r;
        for (int r = 0; r < N; r++) acc[r] = (acc[r] > t) ? acc[r] - t : 0;
        evict_start = 1;
        @(negedge clk);
        evict_start = 0;
        lat = 1;
        while (!done && lat < 1000) begin @(negedge clk); lat++; end
        checks++;
        if (!evict_valid || int'(evict_addr) != ev || lat != t + 2) begin
          failures++;
          $display("FAIL evict addr=%0d exp=%0d valid=%0b lat=%0d exp=%0d", evict_addr, ev, evict_valid, lat, t + 2);
        end
        evictions++;
        cmp_acc("evict");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
