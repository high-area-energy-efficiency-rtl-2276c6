// input_preprocessing_unit: selects the crossbar inputs for one pattern block.
//
// Only the non-zero weights of a kernel are stored, one per wordline, in
// kernel-position order. So the unit keeps the activations whose position is
// set in the current pattern mask and packs them, in position order, into
// packed[0..size-1] (the rest are zero): for the paper's example, a mask with
// positions c and g set turns the window a..i into the pair (c, g).
// It also holds the all-zero detector the paper adds for ReLU sparsity:
// all_zero is high when every selected activation is zero, and the control
// unit then skips the whole block.
// Purely combinational; the mask comes from the weight index buffer through
// the control unit, the window from the input register.
module input_preprocessing_unit import rram_pkg::*; (
  input  window_t         window,
  input  logic [KPOS-1:0] mask,
  output window_t         packed_in,
  output logic            all_zero
);

  always_comb begin
    int n;
    n = 0;
    packed_in = '0;
    for (int k = 0; k < KPOS; k++) begin
      if (mask[k]) begin
        packed_in[n] = window[k];
        n++;
      end
    end
    all_zero = (packed_in == '0);
  end

endmodule
