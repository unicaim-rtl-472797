// tb_cam_topk: CAM top-k race with N = 12 rows, D = 8 (currents 0..64). Random currents,
// random valid rows and random k. Reference (independent of the race): sort the valid
// rows' currents ascending, c[0] <= c[1] <= ...; with n valid rows, n <= k selects all of
// them, else exactly the rows with current below c[k] (ties at the boundary are dropped).
// The latency start -> done must be 3 + (8*D+1 - c[k]) clocks (3 when n <= k).
module tb_cam_topk;
  localparam int N = 12, D = 8, IW = $clog2(8*D + 1), CW = 4, AW = 4;
  logic clk = 0, rst_n, start;
  logic [CW-1:0] k_cfg;
  logic [N-1:0]  row_en, sel, exp_sel;
  logic [IW-1:0] i_sl [N];
  logic busy, done, ctrl1;
  logic [CW-1:0] sel_count;
  int checks = 0, failures = 0, ties = 0;

  cam_topk #(.N(N), .D(D), .IW(IW), .CW(CW), .AW(AW)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .k_cfg(k_cfg), .row_en(row_en), .i_sl(i_sl),
    .busy(busy), .done(done), .ctrl1(ctrl1), .sel(sel), .sel_count(sel_count));

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; k_cfg = '0; row_en = '0;
    for (int r = 0; r < N; r++) i_sl[r] = '0;
    #12 rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      int c[$], n, exp_lat, lat, thr;
      @(negedge clk);
      k_cfg  = CW'(1 + $urandom % 5);
      row_en = (it % 4 == 0) ? '1 : N'($urandom);
      for (int r = 0; r < N; r++) i_sl[r] = IW'($urandom % (8*D + 1));
      c = {};
      for (int r = 0; r < N; r++) if (row_en[r]) c.push_back(int'(i_sl[r]));
      c.sort();
      n = c.size();
      exp_sel = '0;
      if (n <= int'(k_cfg)) begin
        exp_sel = row_en; exp_lat = 3;
      end else begin
        begin int kk; kk = int'(k_cfg); thr = c[kk]; end
        for (int r = 0; r < N; r++) exp_sel[r] = row_en[r] && (int'(i_sl[r]) < thr);
        exp_lat = 3 + (8*D + 1 - thr);
        begin int kk, cb; kk = int'(k_cfg) - 1; cb = c[kk]; if (cb == thr) ties++; end
      end
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done && lat < 1000) begin @(negedge clk); lat++; end
      checks++;
      if (sel !== exp_sel || int'(sel_count) != $countones(exp_sel) || lat != exp_lat) begin
        failures++;
        $display("FAIL it=%0d k=%0d sel=%b exp=%b count=%0d lat=%0d exp=%0d", it, k_cfg, sel, exp_sel, sel_count, lat, exp_lat);
      end
    end
    checks++;
    if (ties == 0) begin failures++; $display("FAIL no boundary tie exercised"); end
    $display("boundary ties seen: %0d", ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
