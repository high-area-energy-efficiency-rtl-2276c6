// wordline_decoder: activates the wordlines of one operation unit and drives
// each with its input activation.
//
// Rows row_base .. row_base+row_cnt-1 are enabled; row row_base+i receives
// packed input in_off+i from the input preprocessing unit (in_off is non-zero
// only when a block is taller than the OU and is split into several row
// steps). All other rows are off and driven with zero. The paper names this
// decoder in its architecture figure; the one-hot range decode is the plain
// implementation of that name. Combinational.
module wordline_decoder import rram_pkg::*; #(
  parameter int XBAR_ROWS = 512
) (
  input  logic              valid,
  input  logic [ROW_AW-1:0] row_base,
  input  logic [SIZE_W-1:0] row_cnt,
  input  logic [SIZE_W-1:0] in_off,
  input  window_t           packed_in,
  output logic [XBAR_ROWS-1:0] wl_en,
  output act_t              wl_in [XBAR_ROWS]
);

  always_comb begin
    for (int r = 0; r < XBAR_ROWS; r++) begin
      logic [ROW_AW:0] d;
      logic [ROW_AW:0] k;
      d = (ROW_AW+1)'(r) - (ROW_AW+1)'(row_base);
      k = d + (ROW_AW+1)'(in_off);
      wl_en[r] = valid && (r >= int'(row_base)) && (d < (ROW_AW+1)'(row_cnt));
      wl_in[r] = (wl_en[r] && int'(k) < KPOS) ? packed_in[k[3:0]] : '0;
    end
  end

endmodule
