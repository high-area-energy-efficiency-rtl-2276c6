// tb_relu_unit: random signed accumulator values; negative ones must become 0.
module tb_relu_unit;
  import rram_pkg::*;
  logic in_valid, out_valid;
  acc_t in_data, out_data;
  relu_unit dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 1000; t++) begin
      int v;
      v = int'($urandom_range(2000, 0)) - 1000;
      in_valid = t[0]; in_data = acc_t'(v);
      #1; checks++;
      if (out_valid != in_valid || int'(out_data) != (v < 0 ? 0 : v)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
