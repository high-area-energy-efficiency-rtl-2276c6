// relu_unit: rectified linear activation on the accumulated output values.
//
// The paper only names a ReLU unit next to the computing unit; this is the
// plain function out = max(0, in), applied to the value read from the output
// register, with the valid/tag signals passed alongside. Combinational.
module relu_unit import rram_pkg::*; (
  input  logic in_valid,
  input  acc_t in_data,
  output logic out_valid,
  output acc_t out_data
);

  assign out_valid = in_valid;
  assign out_data  = (in_data < 0) ? '0 : in_data;

endmodule
