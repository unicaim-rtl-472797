// tb_topk_mux: random selections (N = 16 rows, K = 4 channels); channel j must carry the
// j-th selected row (ascending), its current and address, unused channels 0 and invalid.
module tb_topk_mux;
  localparam int N = 16, K = 4, IW = 7, AW = 4;
  logic [N-1:0]  sel;
  logic [IW-1:0] i_sl [N];
  logic [IW-1:0] ch_i [K];
  logic [AW-1:0] ch_addr [K];
  logic [K-1:0]  ch_valid;
  int checks = 0, failures = 0;

  topk_mux #(.N(N), .K(K), .IW(IW), .AW(AW)) dut (
    .sel(sel), .i_sl(i_sl), .ch_i(ch_i), .ch_addr(ch_addr), .ch_valid(ch_valid));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      int list[$];
      sel = '0;
      for (int r = 0; r < N; r++) begin
        sel[r]  = (($urandom % 16) < (it % 8));
        i_sl[r] = IW'($urandom);
      end
      #1;
      list = {};
      for (int r = 0; r < N; r++) if (sel[r]) list.push_back(r);
      for (int j = 0; j < K; j++) begin
        checks++;
        if (j < list.size()) begin
          if (!ch_valid[j] || int'(ch_addr[j]) != list[j] || ch_i[j] != i_sl[list[j]]) begin
            failures++;
            $display("FAIL ch%0d addr=%0d exp=%0d valid=%0b", j, ch_addr[j], list[j], ch_valid[j]);
          end
        end else if (ch_valid[j] || ch_i[j] != 0) begin
          failures++;
          $display("FAIL ch%0d should be idle", j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
