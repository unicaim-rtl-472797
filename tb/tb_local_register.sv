// tb_local_register: capture / hold / clear of the selection register (N = 12) and its
// count and lowest-address outputs, against values computed in the testbench.
module tb_local_register;
  localparam int N = 12, AW = 4, CW = 4;
  logic clk = 0, rst_n, clr, capture;
  logic [N-1:0]  sel_in, sel, model;
  logic [CW-1:0] count;
  logic [AW-1:0] first_addr;
  int checks = 0, failures = 0;

  local_register #(.N(N), .AW(AW), .CW(CW)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .capture(capture), .sel_in(sel_in),
    .sel(sel), .count(count), .first_addr(first_addr));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clr = 0; capture = 0; sel_in = '0; model = '0;
    #12 rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      clr     = ($urandom % 8) == 0;
      capture = 1'($urandom);
      sel_in  = N'($urandom);
      @(posedge clk);
      if (clr) model = '0;
      else if (capture) model = sel_in;
      #1;
      begin
        int ec, ea;
        ec = 0; ea = 0;
        for (int r = N - 1; r >= 0; r--) if (model[r]) ea = r;
        for (int r = 0; r < N; r++) ec += model[r];
        checks++;
        if (sel !== model || int'(count) != ec || (ec > 0 && int'(first_addr) != ea)) begin
          failures++;
          $display("FAIL sel=%b exp=%b count=%0d/%0d first=%0d/%0d", sel, model, count, ec, first_addr, ea);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
