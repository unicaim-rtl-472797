// tb_current_cim: current-domain CIM with N = 16 rows, D = 8 (currents 0..64), K = 4
// ADCs of B = 6 bits (full scale 63, so a current of 64 clips). For random top-k
// selections the channels must report the selected rows in ascending order with
// score = 32 - min(i_sl, 63), and done must come B+1 clocks after start.
module tb_current_cim;
  localparam int N = 16, D = 8, K = 4, B = 6, IW = $clog2(8*D + 1), AW = 4;
  logic clk = 0, rst_n, start, done;
  logic [N-1:0]  sel;
  logic [IW-1:0] i_sl [N];
  logic signed [IW:0] score [K];
  logic [AW-1:0] addr [K];
  logic [K-1:0]  valid;
  int checks = 0, failures = 0;

  current_cim #(.N(N), .D(D), .K(K), .B(B), .IW(IW), .AW(AW)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .sel(sel), .i_sl(i_sl),
    .done(done), .score(score), .addr(addr), .valid(valid));

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; sel = '0;
    for (int r = 0; r < N; r++) i_sl[r] = '0;
    #12 rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      int list[$], lat;
      @(negedge clk);
      for (int r = 0; r < N; r++) begin
        sel[r]  = ($urandom % 4) == 0;
        i_sl[r] = (it % 10 == 0) ? IW'(64) : IW'($urandom % 65);
      end
      list = {};
      for (int r = 0; r < N; r++) if (sel[r]) list.push_back(r);
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      checks++;
      if (lat != B + 1) begin failures++; $display("FAIL latency %0d", lat); end
      for (int j = 0; j < K; j++) begin
        checks++;
        if (j < list.size()) begin
          int ii, es;
          ii = int'(i_sl[list[j]]);
          es = 4*D - ((ii > 63) ? 63 : ii);
          if (!valid[j] || int'(addr[j]) != list[j] || int'(score[j]) != es) begin
            failures++;
            $display("FAIL ch%0d addr=%0d/%0d score=%0d/%0d valid=%0b", j, addr[j], list[j], score[j], es, valid[j]);
          end
        end else if (valid[j]) begin
          failures++; $display("FAIL ch%0d should be invalid", j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
