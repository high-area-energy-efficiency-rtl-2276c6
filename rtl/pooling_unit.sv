// pooling_unit: max pooling over successive output positions.
//
// The paper only names a pooling unit. This design computes max pooling (as
// VGG16 uses) by keeping one running maximum per output channel while the
// control unit processes the POOL_WIN windows of a pooling group one after
// another: first starts a new maximum, last emits the result. With pooling
// off the control unit marks every window first and last, so values pass
// through unchanged. The order in which windows are fed is the host's job.
// Registered output, one cycle after the input.
module pooling_unit import rram_pkg::*; #(
  parameter int NUM_OC = 512
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  oc_idx_t  in_oc,
  input  acc_t     in_data,
  input  logic     first,
  input  logic     last,
  output logic     out_valid,
  output oc_idx_t  out_oc,
  output acc_t     out_data
);

  acc_t run_max [NUM_OC];
  acc_t m;

  always_comb begin
    m = in_data;
    if (!first && run_max[in_oc[$clog2(NUM_OC)-1:0]] > in_data)
      m = run_max[in_oc[$clog2(NUM_OC)-1:0]];
  end

  always_ff @(posedge clk)
    if (in_valid) run_max[in_oc[$clog2(NUM_OC)-1:0]] <= m;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_oc    <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && last;
      out_oc    <= in_oc;
      out_data  <= m;
    end
  end

endmodule
