// control_unit: sequences one convolution window through the computing unit.
//
// The crossbar holds, channel after channel, the compressed pattern blocks of
// a pattern-pruned layer. Their positions are not stored: the unit recovers
// them from the index tables with the same rule the mapping used (paper,
// Sections III-B and IV-C). Within one input channel the blocks come in order
// of decreasing pattern size. The first block sits at the region's top-left
// corner and its size sets the region height. For each next block, if the
// rows left below the current block (region height - row - height of the
// current block) are enough for its size, it goes directly below the current
// block, left-aligned; otherwise it starts new columns to the right of
// everything placed so far, aligned to the top. Regions of successive
// channels are stacked downwards, each as tall as its largest pattern
// (the vertical stacking is this design's reading of "store all the weights
// channel by channel").
//
// Each block is cut into operation units (OUs) of at most OU_ROWS x OU_COLS,
// never crossing a block edge, and one OU is issued per cycle. A block whose
// selected inputs are all zero (all_zero from the input preprocessing unit)
// is skipped without issuing any OU; its index pointer still advances.
//
// Sequence per start: clear the output register; for every channel read its
// pattern count (1 cycle), then per block read its entry and place it
// (1 cycle) and issue its OUs (1 cycle each); wait DRAIN cycles for the
// crossbar/ADC/accumulate pipeline; then read NUM_OC results one per cycle
// towards ReLU and pooling; pulse done. With pool_en the unit counts windows
// and marks the first and last of every POOL_WIN consecutive windows, so the
// pooling unit keeps a running maximum; without it every window is first and
// last. The cycle costs of table reads and the drain are this design's choice.
module control_unit import rram_pkg::*; #(
  parameter int XBAR_ROWS = 512,
  parameter int OU_ROWS   = 9,
  parameter int OU_COLS   = 8,
  parameter int POOL_WIN  = 4,
  parameter int DRAIN     = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [CH_AW-1:0]      num_ch,     // input channels of the layer
  input  logic [OC_AW:0]        num_oc,     // output channels to read out, 1..512
  input  logic                  pool_en,
  // weight index buffer
  output logic [CH_AW-1:0]      ch_raddr,
  input  logic [NPAT_W-1:0]     ch_npat,
  output logic [PAT_AW-1:0]     pat_raddr,
  input  pattern_entry_t        pat,
  // input register / input preprocessing unit
  output logic [KPOS-1:0]       ipu_mask,
  input  logic                  ipu_all_zero,
  // OU issue to decoders and output indexing
  output ou_cmd_t               ou,
  // output register and readout
  output logic                  acc_clear,
  output logic                  rd_valid,
  output logic [OC_AW-1:0]      rd_oc,
  output logic                  rd_first,
  output logic                  rd_last,
  // status
  output logic                  busy,
  output logic                  done,
  output logic [31:0]           ou_count,    // OUs issued since reset
  output logic [31:0]           skip_count,  // blocks skipped by all-zero detection
  output logic [31:0]           newcol_count,// blocks placed in new columns
  output logic [31:0]           below_count  // blocks placed below the previous one
);

  typedef enum logic [2:0] {S_IDLE, S_CH, S_PAT, S_OU, S_DRAIN, S_OUT, S_DONE} state_t;
  state_t state;

  logic [CH_AW-1:0]  ch;
  logic [PAT_AW-1:0] pat_ptr;
  logic [OCP_AW-1:0] oc_ptr;
  logic [NPAT_W-1:0] pats_left;
  logic              first;
  logic [ROW_AW-1:0] region_base;
  logic [SIZE_W-1:0] region_h;
  logic [SIZE_W-1:0] cur_row, cur_h;
  logic [COL_AW-1:0] cur_col, col_next;
  logic [CNT_W-1:0]  blk_cnt;
  logic [SIZE_W-1:0] ou_r;
  logic [CNT_W-1:0]  ou_c;
  logic [3:0]        drain_cnt;
  logic [OC_AW:0]    oc_cnt;
  logic [$clog2(POOL_WIN+1)-1:0] win;

  // placement of the block read in S_PAT
  logic [SIZE_W-1:0] p_row;
  logic [COL_AW-1:0] p_col;
  logic              p_below;
  logic [SIZE_W-1:0] p_region_h;
  logic [COL_AW-1:0] p_end;

  always_comb begin
    p_below    = 1'b0;
    p_region_h = first ? pat.size : region_h;
    if (first) begin
      p_row = '0;
      p_col = '0;
    end else if (5'(region_h) >= 5'(cur_row) + 5'(cur_h) + 5'(pat.size)) begin
      p_row   = cur_row + cur_h;
      p_col   = cur_col;
      p_below = 1'b1;
    end else begin
      p_row = '0;
      p_col = col_next;
    end
    p_end = p_col + COL_AW'(pat.count);
  end

  // OU geometry in S_OU
  logic [SIZE_W-1:0] rows_left;
  logic [CNT_W-1:0]  cols_left;
  logic              last_col_step, last_row_step;
  always_comb begin
    rows_left     = cur_h - ou_r;
    cols_left     = blk_cnt - ou_c;
    last_col_step = (cols_left <= CNT_W'(OU_COLS));
    last_row_step = (rows_left <= SIZE_W'(OU_ROWS));
  end

  assign ch_raddr  = ch;
  assign pat_raddr = pat_ptr;
  assign ipu_mask  = pat.mask;
  assign acc_clear = (state == S_IDLE) && start;
  assign busy      = (state != S_IDLE);

  always_comb begin
    ou          = '0;
    ou.valid    = (state == S_OU);
    ou.row_base = region_base + ROW_AW'(cur_row) + ROW_AW'(ou_r);
    ou.row_cnt  = last_row_step ? rows_left : SIZE_W'(OU_ROWS);
    ou.col_base = cur_col + COL_AW'(ou_c);
    ou.col_cnt  = last_col_step ? cols_left : CNT_W'(OU_COLS);
    ou.in_off   = ou_r;
    ou.oc_ptr   = oc_ptr + OCP_AW'(ou_c);
  end

  assign rd_valid = (state == S_OUT);
  assign rd_oc    = oc_cnt[OC_AW-1:0];
  assign rd_first = !pool_en || (int'(win) == 0);
  assign rd_last  = !pool_en || (int'(win) == POOL_WIN - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      ch           <= '0;
      pat_ptr      <= '0;
      oc_ptr       <= '0;
      pats_left    <= '0;
      first        <= 1'b0;
      region_base  <= '0;
      region_h     <= '0;
      cur_row      <= '0;
      cur_h        <= '0;
      cur_col      <= '0;
      col_next     <= '0;
      blk_cnt      <= '0;
      ou_r         <= '0;
      ou_c         <= '0;
      drain_cnt    <= '0;
      oc_cnt       <= '0;
      win          <= '0;
      done         <= 1'b0;
      ou_count     <= '0;
      skip_count   <= '0;
      newcol_count <= '0;
      below_count  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          ch          <= '0;
          pat_ptr     <= '0;
          oc_ptr      <= '0;
          region_base <= '0;
          state       <= S_CH;
        end
        S_CH: begin
          if (ch == num_ch) begin
            drain_cnt <= 4'(DRAIN - 1);
            state     <= S_DRAIN;
          end else if (ch_npat == 0) begin
            ch <= ch + 1'b1;           // every kernel of this channel is all-zero
          end else begin
            pats_left <= ch_npat;
            first     <= 1'b1;
            col_next  <= '0;
            state     <= S_PAT;
          end
        end
        S_PAT: begin
          first    <= 1'b0;
          region_h <= p_region_h;
          cur_row  <= p_row;
          cur_col  <= p_col;
          cur_h    <= pat.size;
          blk_cnt  <= pat.count;
          col_next <= (first || p_end > col_next) ? p_end : col_next;
          if (!first) begin
            if (p_below) below_count  <= below_count + 1;
            else         newcol_count <= newcol_count + 1;
          end
          ou_r <= '0;
          ou_c <= '0;
          if (ipu_all_zero) begin
            skip_count <= skip_count + 1;
            oc_ptr     <= oc_ptr + OCP_AW'(pat.count);
            pat_ptr    <= pat_ptr + 1'b1;
            pats_left  <= pats_left - 1'b1;
            if (pats_left == 1) begin
              region_base <= region_base + ROW_AW'(p_region_h);
              ch          <= ch + 1'b1;
              state       <= S_CH;
            end
          end else begin
            state <= S_OU;
          end
        end
        S_OU: begin
          ou_count <= ou_count + 1;
          if (!last_col_step) begin
            ou_c <= ou_c + CNT_W'(OU_COLS);
          end else if (!last_row_step) begin
            ou_c <= '0;
            ou_r <= ou_r + SIZE_W'(OU_ROWS);
          end else begin
            // end of the block: move the index pointers on, and close the
            // channel after its last block
            oc_ptr    <= oc_ptr + OCP_AW'(blk_cnt);
            pat_ptr   <= pat_ptr + 1'b1;
            pats_left <= pats_left - 1'b1;
            if (pats_left == 1) begin
              region_base <= region_base + ROW_AW'(region_h);
              ch          <= ch + 1'b1;
              state       <= S_CH;
            end else begin
              state <= S_PAT;
            end
          end
        end
        S_DRAIN: begin
          if (drain_cnt == 0) begin
            oc_cnt <= '0;
            state  <= S_OUT;
          end else begin
            drain_cnt <= drain_cnt - 1'b1;
          end
        end
        S_OUT: begin
          oc_cnt <= oc_cnt + 1'b1;
          if (oc_cnt == num_oc - 1'b1) state <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          win   <= (!pool_en || int'(win) == POOL_WIN - 1) ? '0 : win + 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a channel region must stay inside the crossbar
  a_rows_fit: assert property (@(posedge clk) disable iff (!rst_n)
    ou.valid |-> (32'(ou.row_base) + 32'(ou.row_cnt) <= XBAR_ROWS));

endmodule
