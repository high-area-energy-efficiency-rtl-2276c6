// rram_crossbar: behavioural model of the RRAM crossbar array together with
// its wordline DACs and bitline sample-and-hold. Not synthesizable logic in
// the real chip: this is an analog array, modelled here with integers.
//
// Each cell stores one signed W_BITS weight (4 bits per cell in the paper).
// When an OU is active, each enabled bitline carries the sum over enabled
// wordlines of (activation * weight), the ideal current of an RRAM column
// fed by ideal DACs; the sample-and-hold captures the OU_COLS lane values on
// the clock edge (held, held_valid), so the ADCs see them one cycle after
// issue. Non-idealities (conductance deviation, IR drop, noise) are not
// modelled; the paper uses them only to motivate the OU size.
// Cells are written one at a time through the programming port. Storage is
// column-major (one word of XBAR_ROWS cells per bitline) so a lane reads its
// whole column at once.
module rram_crossbar import rram_pkg::*; #(
  parameter int XBAR_ROWS = 512,
  parameter int XBAR_COLS = 512,
  parameter int OU_COLS   = 8
) (
  input  logic                 clk,
  // programming
  input  logic                 w_we,
  input  logic [ROW_AW-1:0]    w_row,
  input  logic [COL_AW-1:0]    w_col,
  input  weight_t              w_data,
  // compute
  input  logic [XBAR_ROWS-1:0] wl_en,
  input  act_t                 wl_in [XBAR_ROWS],
  input  logic [XBAR_COLS-1:0] bl_en,
  input  logic [COL_AW-1:0]    lane_col [OU_COLS],
  input  logic [OU_COLS-1:0]   lane_en,
  // sample-and-hold outputs
  output colsum_t              held [OU_COLS],
  output logic [OU_COLS-1:0]   held_valid
);

  typedef weight_t [XBAR_ROWS-1:0] column_t;
  column_t cells [XBAR_COLS];

  always_ff @(posedge clk)
    if (w_we) cells[w_col[$clog2(XBAR_COLS)-1:0]][w_row[$clog2(XBAR_ROWS)-1:0]] <= w_data;

  colsum_t bl_sum [OU_COLS];
  logic [OU_COLS-1:0] bl_on;

  for (genvar j = 0; j < OU_COLS; j++) begin : g_lane
    column_t col;
    assign col      = cells[lane_col[j][$clog2(XBAR_COLS)-1:0]];
    assign bl_on[j] = lane_en[j] && bl_en[lane_col[j][$clog2(XBAR_COLS)-1:0]];
    always_comb begin
      colsum_t s;
      s = '0;
      for (int r = 0; r < XBAR_ROWS; r++)
        if (wl_en[r])
          s = s + SUM_BITS'($signed({1'b0, wl_in[r]}) * col[r]);
      bl_sum[j] = bl_on[j] ? s : '0;
    end
  end

  always_ff @(posedge clk) begin
    held       <= bl_sum;
    held_valid <= bl_on;
  end

endmodule
