// pp_rram_accel: one computing unit (CU) of the pattern-pruned RRAM CNN
// accelerator, from input register to pooled outputs.
//
// A pattern-pruned 3x3 convolution layer is stored in the crossbar in
// compressed form: per input channel, kernels with the same pattern are
// gathered, their zero weights removed, and the resulting pattern blocks
// (height = pattern size, width = number of kernels) placed by a fixed rule.
// The weight index buffer keeps each block's pattern and the output channel
// of each kernel. For one output position the CU then:
//   1. control_unit walks the channels and their blocks, recovering each
//      block's place in the crossbar from the indexes alone;
//   2. input_preprocessing_unit picks the activations the block's pattern
//      needs from the input register and detects all-zero inputs (skip);
//   3. wordline_decoder / bitline_decoder activate one OU (at most
//      OU_ROWS x OU_COLS cells, 9 x 8 by default) per cycle;
//   4. rram_crossbar (behavioural) forms the column sums, samples and holds
//      them; adc converts them to 8-bit codes;
//   5. output_indexing_unit maps each lane to its output channel and
//      output_accumulator adds it in;
//   6. after the last OU the control unit reads out num_oc words
//      through relu_unit and pooling_unit to out_*.
// Latency from OU issue to the accumulator write is 3 clock edges (sample &
// hold, ADC, add). The on-chip feature-map buffer is outside: the host loads
// the input register through in_*, and programs the crossbar and the index
// tables through the xb_*, ch_*, pat_* and oc_* ports before computing.
module pp_rram_accel import rram_pkg::*; #(
  parameter int XBAR_ROWS = 512,
  parameter int XBAR_COLS = 512,
  parameter int OU_ROWS   = 9,
  parameter int OU_COLS   = 8,
  parameter int MAX_CH    = 512,
  parameter int NUM_OC    = 512,
  parameter int PAT_DEPTH = 8192,
  parameter int OC_DEPTH  = 262144,
  parameter int POOL_WIN  = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // layer configuration
  input  logic [CH_AW-1:0]  num_ch,
  input  logic [OC_AW:0]    num_oc,
  input  logic              pool_en,
  // crossbar programming
  input  logic              xb_we,
  input  logic [ROW_AW-1:0] xb_row,
  input  logic [COL_AW-1:0] xb_col,
  input  weight_t           xb_data,
  // index buffer loading
  input  logic              ch_we,
  input  logic [CH_AW-1:0]  ch_waddr,
  input  logic [NPAT_W-1:0] ch_wdata,
  input  logic              pat_we,
  input  logic [PAT_AW-1:0] pat_waddr,
  input  pattern_entry_t    pat_wdata,
  input  logic              oc_we,
  input  logic [OCP_AW-1:0] oc_waddr,
  input  oc_idx_t           oc_wdata,
  // input register loading (from the on-chip buffer)
  input  logic              in_we,
  input  logic [CH_AW-1:0]  in_ch,
  input  window_t           in_win,
  // compute
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              out_valid,
  output oc_idx_t           out_oc,
  output acc_t              out_data,
  // activity counters
  output logic [31:0]       ou_count,
  output logic [31:0]       skip_count,
  output logic [31:0]       newcol_count,
  output logic [31:0]       below_count
);

  localparam int LAT = 2;  // sample & hold + ADC

  // index buffer
  logic [CH_AW-1:0]  ch_raddr;
  logic [NPAT_W-1:0] ch_npat;
  logic [PAT_AW-1:0] pat_raddr;
  pattern_entry_t    pat;
  logic [OCP_AW-1:0] oc_raddr;
  oc_idx_t           oc_rdata [OU_COLS];

  // input path
  window_t         win, packed_in;
  logic [KPOS-1:0] ipu_mask;
  logic            all_zero;

  // OU
  ou_cmd_t ou;
  logic [XBAR_ROWS-1:0] wl_en;
  act_t                 wl_in [XBAR_ROWS];
  logic [XBAR_COLS-1:0] bl_en;
  logic [COL_AW-1:0]    lane_col [OU_COLS];
  logic [OU_COLS-1:0]   lane_en;
  colsum_t              held [OU_COLS];
  logic [OU_COLS-1:0]   held_valid;
  logic [OU_COLS-1:0]   adc_valid;
  adc_code_t            code [OU_COLS];

  // output path
  logic [OU_COLS-1:0] wr_en;
  oc_idx_t            wr_oc  [OU_COLS];
  adc_code_t          wr_val [OU_COLS];
  logic               acc_clear;
  logic               rd_valid, rd_first, rd_last;
  oc_idx_t            rd_oc;
  acc_t               rd_data;
  logic               relu_valid;
  acc_t               relu_data;

  weight_index_buffer #(.MAX_CH(MAX_CH), .PAT_DEPTH(PAT_DEPTH), .OC_DEPTH(OC_DEPTH),
                        .OU_COLS(OU_COLS)) u_wib (
    .clk, .ch_we, .ch_waddr, .ch_wdata, .pat_we, .pat_waddr, .pat_wdata,
    .oc_we, .oc_waddr, .oc_wdata,
    .ch_raddr, .ch_rdata(ch_npat), .pat_raddr, .pat_rdata(pat), .oc_raddr, .oc_rdata);

  input_register #(.MAX_CH(MAX_CH)) u_ireg (
    .clk, .we(in_we), .waddr(in_ch), .wdata(in_win), .raddr(ch_raddr), .rdata(win));

  input_preprocessing_unit u_ipu (
    .window(win), .mask(ipu_mask), .packed_in, .all_zero);

  control_unit #(.XBAR_ROWS(XBAR_ROWS), .OU_ROWS(OU_ROWS), .OU_COLS(OU_COLS),
                 .POOL_WIN(POOL_WIN)) u_ctrl (
    .clk, .rst_n, .start, .num_ch, .num_oc, .pool_en,
    .ch_raddr, .ch_npat, .pat_raddr, .pat,
    .ipu_mask, .ipu_all_zero(all_zero),
    .ou, .acc_clear, .rd_valid, .rd_oc, .rd_first, .rd_last,
    .busy, .done, .ou_count, .skip_count, .newcol_count, .below_count);

  wordline_decoder #(.XBAR_ROWS(XBAR_ROWS)) u_wld (
    .valid(ou.valid), .row_base(ou.row_base), .row_cnt(ou.row_cnt), .in_off(ou.in_off),
    .packed_in, .wl_en, .wl_in);

  bitline_decoder #(.XBAR_COLS(XBAR_COLS), .OU_COLS(OU_COLS)) u_bld (
    .valid(ou.valid), .col_base(ou.col_base), .col_cnt(ou.col_cnt),
    .bl_en, .lane_col, .lane_en);

  rram_crossbar #(.XBAR_ROWS(XBAR_ROWS), .XBAR_COLS(XBAR_COLS), .OU_COLS(OU_COLS)) u_xbar (
    .clk, .w_we(xb_we), .w_row(xb_row), .w_col(xb_col), .w_data(xb_data),
    .wl_en, .wl_in, .bl_en, .lane_col, .lane_en, .held, .held_valid);

  for (genvar j = 0; j < OU_COLS; j++) begin : g_adc
    adc u_adc (.clk, .in_valid(held_valid[j]), .in_value(held[j]),
               .out_valid(adc_valid[j]), .code(code[j]));
  end

  output_indexing_unit #(.OU_COLS(OU_COLS), .LATENCY(LAT)) u_oiu (
    .clk, .rst_n, .issue_valid(ou.valid), .issue_oc_ptr(ou.oc_ptr),
    .issue_col_cnt(ou.col_cnt), .code, .oc_raddr, .oc_rdata, .wr_en, .wr_oc, .wr_val);

  output_accumulator #(.NUM_OC(NUM_OC), .LANES(OU_COLS)) u_acc (
    .clk, .rst_n, .clear(acc_clear), .wr_en, .wr_oc, .wr_val, .rd_oc, .rd_data);

  relu_unit u_relu (.in_valid(rd_valid), .in_data(rd_data),
                    .out_valid(relu_valid), .out_data(relu_data));

  pooling_unit #(.NUM_OC(NUM_OC)) u_pool (
    .clk, .rst_n, .in_valid(relu_valid), .in_oc(rd_oc), .in_data(relu_data),
    .first(rd_first), .last(rd_last), .out_valid, .out_oc, .out_data);

  // the ADC lanes that produce a code are exactly the lanes the output
  // indexing unit writes
  a_lanes: assert property (@(posedge clk) disable iff (!rst_n) (adc_valid == wr_en));

endmodule
