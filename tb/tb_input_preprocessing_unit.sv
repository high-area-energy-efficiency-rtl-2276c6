// tb_input_preprocessing_unit: random windows and pattern masks (with many
// zero activations); the selected activations must appear packed in position
// order and all_zero must say whether all of them are zero. Includes the
// paper's example: mask with positions c and g selects (c, g).
module tb_input_preprocessing_unit;
  import rram_pkg::*;
  window_t window, packed_in;
  logic [KPOS-1:0] mask;
  logic all_zero;
  input_preprocessing_unit dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    // positions a..i = 0..8; c = 2, g = 6
    for (int k = 0; k < KPOS; k++) window[k] = act_t'(k + 1);
    mask = 9'b001000100; #1;
    checks++; if (packed_in[0] != 3 || packed_in[1] != 7 || packed_in[8:2] != '0 || all_zero) failures++;
    for (int t = 0; t < 2000; t++) begin
      window_t e;
      logic z;
      int n;
      for (int k = 0; k < KPOS; k++) window[k] = ($urandom_range(3, 0) == 0) ? act_t'($urandom) : '0;
      mask = KPOS'($urandom);
      #1;
      e = '0; n = 0; z = 1;
      for (int k = 0; k < KPOS; k++) if (mask[k]) begin e[n] = window[k]; n++; if (window[k] != 0) z = 0; end
      checks++; if (packed_in != e) failures++;
      checks++; if (all_zero != z) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
