// weight_index_buffer: the index memory of one computing unit.
//
// Because kernels are reordered before they are written into the crossbar,
// the unit must keep, for every input channel and in mapping order, which
// patterns were stored and which output channel each stored kernel belongs to.
// Following the paper, indexes are kept pattern by pattern in the order the
// pattern blocks were placed: for each pattern its shape (mask and size) and
// the output-channel index of each kernel. The split into three tables is this
// design's own choice:
//   ch_tab  [channel]  number of stored (non-zero) patterns of that channel
//   pat_tab [entry]    pattern_entry_t, all channels' patterns back to back
//   oc_tab  [address]  9-bit output channel of each stored kernel, back to back
// All-zero patterns are not stored, so their kernels need no index.
//
// Each table has one synchronous write port for loading. Reads are
// asynchronous: one channel entry, one pattern entry and OU_COLS consecutive
// output-channel indexes (one per OU column lane) per cycle.
// Default depths are worst cases for a 512x512 crossbar: 512 channel regions
// of one row, 12 patterns per channel (the paper's maximum, rounded up to a
// power of two with 512 channels), and one index per crossbar cell.
module weight_index_buffer import rram_pkg::*; #(
  parameter int MAX_CH    = 512,
  parameter int PAT_DEPTH = 8192,
  parameter int OC_DEPTH  = 262144,
  parameter int OU_COLS   = 8
) (
  input  logic                  clk,
  // loading
  input  logic                  ch_we,
  input  logic [CH_AW-1:0]      ch_waddr,
  input  logic [NPAT_W-1:0]     ch_wdata,
  input  logic                  pat_we,
  input  logic [PAT_AW-1:0]     pat_waddr,
  input  pattern_entry_t        pat_wdata,
  input  logic                  oc_we,
  input  logic [OCP_AW-1:0]     oc_waddr,
  input  oc_idx_t               oc_wdata,
  // reads
  input  logic [CH_AW-1:0]      ch_raddr,
  output logic [NPAT_W-1:0]     ch_rdata,
  input  logic [PAT_AW-1:0]     pat_raddr,
  output pattern_entry_t        pat_rdata,
  input  logic [OCP_AW-1:0]     oc_raddr,
  output oc_idx_t               oc_rdata [OU_COLS]
);

  logic [NPAT_W-1:0] ch_tab  [MAX_CH];
  pattern_entry_t    pat_tab [PAT_DEPTH];
  oc_idx_t           oc_tab  [OC_DEPTH];

  always_ff @(posedge clk) begin
    if (ch_we)  ch_tab[ch_waddr[$clog2(MAX_CH)-1:0]]     <= ch_wdata;
    if (pat_we) pat_tab[pat_waddr[$clog2(PAT_DEPTH)-1:0]] <= pat_wdata;
    if (oc_we)  oc_tab[oc_waddr[$clog2(OC_DEPTH)-1:0]]    <= oc_wdata;
  end

  assign ch_rdata  = ch_tab[ch_raddr[$clog2(MAX_CH)-1:0]];
  assign pat_rdata = pat_tab[pat_raddr[$clog2(PAT_DEPTH)-1:0]];

  always_comb begin
    for (int j = 0; j < OU_COLS; j++) begin
      logic [OCP_AW-1:0] a;
      a = oc_raddr + OCP_AW'(j);
      oc_rdata[j] = oc_tab[a[$clog2(OC_DEPTH)-1:0]];
    end
  end

endmodule
