// tb_unicaim_cell: exhaustive check of the UniCAIM cell model.
// For every key (-4..+4 quarter steps) and query (+1 / -1) the key is turned into its
// VTH pair (4-k, 4+k) and the query into its bit-line pair; the expected sense-line
// current is 4 - k*q units (0 for a perfect match, 8 for the opposite). A cell with no
// bit line driven must sink nothing.
module tb_unicaim_cell;
  import unicaim_pkg::*;
  vth_t vth1, vth1b;
  logic bl, blb;
  logic [4:0] i_sl;
  int checks = 0, failures = 0;

  unicaim_cell dut (.vth1(vth1), .vth1b(vth1b), .bl(bl), .blb(blb), .i_sl(i_sl));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = -4; k <= 4; k++) begin
      for (int q = -1; q <= 1; q += 2) begin
        vth1  = vth_t'(4 - k);
        vth1b = vth_t'(4 + k);
        bl    = (q < 0);
        blb   = (q > 0);
        #1;
        checks++;
        if (int'(i_sl) != 4 - k*q) begin
          failures++;
          $display("FAIL k=%0d q=%0d i_sl=%0d exp=%0d", k, q, i_sl, 4 - k*q);
        end
      end
      bl = 0; blb = 0; #1;
      checks++;
      if (i_sl != 0) begin failures++; $display("FAIL idle k=%0d i_sl=%0d", k, i_sl); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
