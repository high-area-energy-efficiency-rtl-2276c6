// output_accumulator: the "Add" stage and the output register of the
// computing unit.
//
// One accumulator word per output channel. Each cycle up to LANES reordered
// ADC codes arrive with their output channel; each is sign-extended and added
// to that channel's word (adder with feedback from the output register, as
// drawn in the paper). The lanes of one OU always name different output
// channels, because the kernels of one input channel belong to distinct
// output channels; two lanes naming the same channel in one cycle are a
// protocol error and are flagged by an assertion. clear zeroes every word at
// the start of a window. rd_data is an asynchronous read of one word.
module output_accumulator import rram_pkg::*; #(
  parameter int NUM_OC = 512,
  parameter int LANES  = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic [LANES-1:0] wr_en,
  input  oc_idx_t          wr_oc  [LANES],
  input  adc_code_t        wr_val [LANES],
  input  oc_idx_t          rd_oc,
  output acc_t             rd_data
);

  acc_t acc [NUM_OC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_OC; i++) acc[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < NUM_OC; i++) acc[i] <= '0;
    end else begin
      for (int j = 0; j < LANES; j++)
        if (wr_en[j])
          acc[wr_oc[j][$clog2(NUM_OC)-1:0]] <= acc[wr_oc[j][$clog2(NUM_OC)-1:0]] + acc_t'(wr_val[j]);
    end
  end

  assign rd_data = acc[rd_oc[$clog2(NUM_OC)-1:0]];

  // lanes of one cycle must write distinct output channels
  always_comb begin
    for (int a = 0; a < LANES; a++)
      for (int b = a + 1; b < LANES; b++)
        if (rst_n && !clear && wr_en[a] && wr_en[b])
          a_distinct: assert (wr_oc[a] != wr_oc[b]);
  end

endmodule
