// tb_wl_driver: checks the word-line driver (N = 10): one-hot decode in a write, nothing
// for an address past the last row, all valid rows in a read.
module tb_wl_driver;
  localparam int N = 10, AW = 4;
  logic wr;
  logic [AW-1:0] wr_addr;
  logic [N-1:0]  row_valid, wl, exp_wl;
  int checks = 0, failures = 0;

  wl_driver #(.N(N), .AW(AW)) dut (.wr(wr), .wr_addr(wr_addr), .row_valid(row_valid), .wl(wl));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 100; it++) begin
      wr        = 1'($urandom);
      wr_addr   = AW'($urandom);
      row_valid = N'($urandom);
      #1;
      if (wr) exp_wl = (wr_addr < N) ? (N'(1) << wr_addr) : '0;
      else    exp_wl = row_valid;
      checks++;
      if (wl !== exp_wl) begin
        failures++;
        $display("FAIL wr=%0b addr=%0d valid=%b wl=%b exp=%b", wr, wr_addr, row_valid, wl, exp_wl);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
