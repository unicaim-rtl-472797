// tb_sar_adc: converts random inputs (including values above full scale) with the 10-bit
// SAR ADC and checks code = min(vin, 1023) and a conversion time of B+1 clocks after start (sample, then one bit per clock).
module tb_sar_adc;
  localparam int B = 10, IW = 11;
  logic clk = 0, rst_n, start;
  logic [IW-1:0] vin;
  logic [B-1:0]  code;
  logic          done;
  int checks = 0, failures = 0;

  sar_adc #(.B(B), .IW(IW)) dut (.clk(clk), .rst_n(rst_n), .start(start), .vin(vin), .code(code), .done(done));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; vin = '0;
    #12 rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      int exp_code, lat, v;
      v = (it < 4) ? (it == 0 ? 0 : it == 1 ? 1023 : it == 2 ? 1024 : 2047) : int'($urandom % 2048);
      @(negedge clk);
      vin = IW'(v); start = 1;
      @(negedge clk);
      start = 0; vin = IW'($urandom);     // input changes after sampling: must not matter
      lat = 1;
      while (!done && lat < 50) begin @(negedge clk); lat++; end
      exp_code = (v > 1023) ? 1023 : v;
      checks++;
      if (int'(code) != exp_code || lat != B + 1) begin
        failures++;
        $display("FAIL vin=%0d code=%0d exp=%0d latency=%0d", v, code, exp_code, lat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
