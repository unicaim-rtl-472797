// tb_bl_driver: random check of the bit-line driver (D = 8).
// Query mapping: +1 -> (BL, BLb) = (0, 1), -1 -> (1, 0), nothing while rd_en is low.
// Key mapping: k (clamped to -4..+4) -> (VTH1, VTH1b) = (4-k, 4+k); out-of-range keys
// are included to check the clamp.
module tb_bl_driver;
  import unicaim_pkg::*;
  localparam int D = 8;
  logic         rd_en;
  logic [D-1:0] q_neg, bl, blb;
  key_t         key [D];
  cell_prog_t   prog [D];
  int checks = 0, failures = 0;

  bl_driver #(.D(D)) dut (.rd_en(rd_en), .q_neg(q_neg), .key(key), .bl(bl), .blb(blb), .prog(prog));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 200; it++) begin
      rd_en = 1'($urandom);
      q_neg = D'($urandom);
      for (int c = 0; c < D; c++) key[c] = key_t'($urandom);
      #1;
      for (int c = 0; c < D; c++) begin
        int kc, e1, e1b;
        kc  = int'(key[c]);
        kc  = (kc > 4) ? 4 : (kc < -4) ? -4 : kc;
        e1  = 4 - kc;
        e1b = 4 + kc;
        checks++;
        if (bl[c] !== (rd_en && q_neg[c]) || blb[c] !== (rd_en && !q_neg[c]) ||
            int'(prog[c].vth1) != e1 || int'(prog[c].vth1b) != e1b) begin
          failures++;
          $display("FAIL c=%0d k=%0d q=%0b rd=%0b bl=%0b blb=%0b vth=(%0d,%0d) exp (%0d,%0d)",
                   c, key[c], q_neg[c], rd_en, bl[c], blb[c], prog[c].vth1, prog[c].vth1b, e1, e1b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
