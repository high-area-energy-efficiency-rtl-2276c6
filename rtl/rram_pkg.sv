// rram_pkg: widths and types shared by the pattern-pruned RRAM computing unit.
//
// A 3x3 kernel has nine positions. A pattern is a 9-bit mask of the positions a
// kernel keeps after pattern pruning (bit k = position k, row-major). The
// weight index buffer stores one pattern_entry_t per pattern block: its mask,
// its size (number of ones, i.e. the block's height in the crossbar) and its
// kernel count (the block's width). Address widths below are fixed maxima, so
// every module agrees on port widths whatever array depths are chosen; they
// cover crossbars up to 1024x1024 and index tables up to the sizes noted.
//
// Number formats are this design's own choice where the paper is silent:
// activations are unsigned ACT_BITS (the paper's DAC precision, 4 bits), a
// crossbar cell holds a signed W_BITS weight (the paper's 4 bits per cell),
// ADC codes are signed ADC_BITS (the paper's 8 bits).
package rram_pkg;

  localparam int KPOS     = 9;   // positions of a 3x3 kernel
  localparam int ACT_BITS = 4;   // DAC precision (Table I)
  localparam int W_BITS   = 4;   // bits per RRAM cell (Table I)
  localparam int ADC_BITS = 8;   // ADC precision (Table I)
  localparam int OC_AW    = 9;   // output channel index, "no more than 9 bits (for 512 output channels)"

  localparam int ROW_AW   = 10;  // crossbar row address
  localparam int COL_AW   = 10;  // crossbar column address
  localparam int CH_AW    = 10;  // input channel number
  localparam int PAT_AW   = 14;  // pattern table address
  localparam int OCP_AW   = 20;  // output-channel index table address
  localparam int NPAT_W   = 4;   // stored patterns per input channel (paper: at most 12)
  localparam int SIZE_W   = 4;   // pattern size, 0..9
  localparam int CNT_W    = 10;  // kernels in one pattern block, up to 512

  // Column sum of one bitline over at most KPOS rows:
  // 9 * 15 * (-8) = -1080 needs 12 signed bits.
  localparam int SUM_BITS = 12;
  localparam int ACC_BITS = 20;  // output register word

  typedef logic [ACT_BITS-1:0]        act_t;
  typedef logic signed [W_BITS-1:0]   weight_t;
  typedef logic signed [SUM_BITS-1:0] colsum_t;
  typedef logic signed [ADC_BITS-1:0] adc_code_t;
  typedef logic signed [ACC_BITS-1:0] acc_t;
  typedef logic [OC_AW-1:0]           oc_idx_t;
  typedef act_t [KPOS-1:0]            window_t;   // nine activations of one channel

  typedef struct packed {
    logic [KPOS-1:0]   mask;   // pattern shape
    logic [SIZE_W-1:0] size;   // ones in mask = block height
    logic [CNT_W-1:0]  count;  // kernels with this pattern = block width
  } pattern_entry_t;

  // One operation unit (OU) issued by the control unit.
  typedef struct packed {
    logic              valid;
    logic [ROW_AW-1:0] row_base;  // first wordline
    logic [SIZE_W-1:0] row_cnt;   // wordlines, 1..OU_ROWS
    logic [COL_AW-1:0] col_base;  // first bitline
    logic [CNT_W-1:0]  col_cnt;   // bitlines, 1..OU_COLS
    logic [SIZE_W-1:0] in_off;    // first packed input used by row_base
    logic [OCP_AW-1:0] oc_ptr;    // index-table address of the kernel on col_base
  } ou_cmd_t;

endpackage
