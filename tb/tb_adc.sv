// tb_adc: sweeps the whole column-sum range and random values through the
// ADC model and checks the registered 8-bit code: value >>> 3, saturated.
module tb_adc;
  import rram_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  colsum_t in_value = '0;
  adc_code_t code;
  adc dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk);
    for (int v = -1080; v <= 945; v += 5) begin
      int e;
      e = v >>> 3;
      if (e > 127) e = 127;
      if (e < -128) e = -128;
      in_valid = 1; in_value = colsum_t'(v);
      @(negedge clk);
      checks++;
      if (!out_valid || int'(code) != e) begin failures++; if (failures < 5) $display("%0d -> %0d exp %0d", v, code, e); end
    end
    in_valid = 0; @(negedge clk);
    checks++; if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
