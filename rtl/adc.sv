// adc: behavioural model of one bitline ADC (8 bits in the paper). Not
// synthesizable logic in the real chip: an analog-to-digital converter.
//
// Converts the held bitline value to a signed ADC_BITS code in one clock:
// code = saturate(value >>> SHIFT). SHIFT = 3 is this design's choice; it
// makes the largest column sum of a full 9-row OU (9*15*7 = 945, and
// 9*15*(-8) = -1080) nearly fill the 8-bit range, so only the extreme
// negative end (below -1024) clips. Registered output, one cycle latency.
module adc import rram_pkg::*; #(
  parameter int SHIFT = 3
) (
  input  logic      clk,
  input  logic      in_valid,
  input  colsum_t   in_value,
  output logic      out_valid,
  output adc_code_t code
);

  localparam int MAXC = 2 ** (ADC_BITS - 1) - 1;
  localparam int MINC = -(2 ** (ADC_BITS - 1));

  colsum_t   shifted;
  adc_code_t q;
  always_comb begin
    shifted = in_value >>> SHIFT;
    if (shifted > colsum_t'(MAXC))      q = adc_code_t'(MAXC);
    else if (shifted < colsum_t'(MINC)) q = adc_code_t'(MINC);
    else                                q = adc_code_t'(shifted);
  end

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    code      <= in_valid ? q : '0;
  end

endmodule
