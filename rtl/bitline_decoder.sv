// bitline_decoder: activates the bitlines of one operation unit and routes
// them to the OU_COLS sample-and-hold / ADC lanes.
//
// Bitlines col_base .. col_base+col_cnt-1 are enabled; lane j reads bitline
// col_base+j and is valid for j < col_cnt. The paper names the decoder and
// fixes the OU width (8 bitlines); the lane routing is this design's choice.
// Combinational.
module bitline_decoder import rram_pkg::*; #(
  parameter int XBAR_COLS = 512,
  parameter int OU_COLS   = 8
) (
  input  logic              valid,
  input  logic [COL_AW-1:0] col_base,
  input  logic [CNT_W-1:0]  col_cnt,
  output logic [XBAR_COLS-1:0] bl_en,
  output logic [COL_AW-1:0] lane_col [OU_COLS],
  output logic [OU_COLS-1:0] lane_en
);

  always_comb begin
    for (int c = 0; c < XBAR_COLS; c++)
      bl_en[c] = valid && (c >= int'(col_base)) && (c < int'(col_base) + int'(col_cnt));
    for (int j = 0; j < OU_COLS; j++) begin
      lane_col[j] = col_base + COL_AW'(j);
      lane_en[j]  = valid && (j < int'(col_cnt)) && (int'(col_base) + j < XBAR_COLS);
    end
  end

endmodule
