// tb_unicaim_array: array model with N = 6 rows, D = 8 columns. Rows are written one at
// a time with random keys (program levels from the key encoding), then random +-1
// queries are applied; every row's sense-line current must equal 4*D - q.k, rows whose
// word line is off must sink nothing, and a write must touch only its own row.
module tb_unicaim_array;
  import unicaim_pkg::*;
  localparam int N = 6, D = 8, IW = $clog2(8*D + 1);
  logic clk = 0, we;
  logic [N-1:0] wl;
  cell_prog_t   prog [D];
  logic [D-1:0] bl, blb;
  logic [IW-1:0] i_sl [N];
  int keys [N][D];
  int checks = 0, failures = 0;

  unicaim_array #(.N(N), .D(D), .IW(IW)) dut (
    .clk(clk), .we(we), .wl(wl), .prog(prog), .bl(bl), .blb(blb), .i_sl(i_sl));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_row(int r);
    @(negedge clk);
    we = 1; wl = N'(1) << r;
    for (int c = 0; c < D; c++) begin
      keys[r][c] = int'($urandom % 9) - 4;
      prog[c].vth1  = vth_t'(4 - keys[r][c]);
      prog[c].vth1b = vth_t'(4 + keys[r][c]);
    end
    @(negedge clk);
    we = 0;
  endtask

  task automatic check_read();
    logic [D-1:0] q_neg;
    q_neg = D'($urandom);
    wl = N'($urandom);
    bl = q_neg; blb = ~q_neg;
    #1;
    for (int r = 0; r < N; r++) begin
      int s, e;
      s = 0;
      for (int c = 0; c < D; c++) s += keys[r][c] * (q_neg[c] ? -1 : 1);
      e = wl[r] ? 4*D - s : 0;
      checks++;
      if (int'(i_sl[r]) != e) begin
        failures++;
        $display("FAIL row %0d i_sl=%0d exp=%0d", r, i_sl[r], e);
      end
    end
  endtask

  initial begin
    we = 0; wl = '0; bl = '0; blb = '0;
    for (int c = 0; c < D; c++) prog[c] = '0;
    for (int r = 0; r < N; r++) write_row(r);
    for (int it = 0; it < 50; it++) begin
      @(negedge clk);
      check_read();
      if (it % 5 == 4) write_row(int'($urandom % N));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
