// input_register: the 3x3 input window of every input channel for the
// output position being computed.
//
// The paper draws this register between the on-chip feature-map buffer and
// the input preprocessing unit; its organisation is this design's own choice:
// one entry of nine activations per input channel, written one channel per
// cycle (synchronous write) and read one channel per cycle (asynchronous read)
// by the input preprocessing unit as the control unit walks the channels.
module input_register import rram_pkg::*; #(
  parameter int MAX_CH = 512
) (
  input  logic             clk,
  input  logic             we,
  input  logic [CH_AW-1:0] waddr,
  input  window_t          wdata,
  input  logic [CH_AW-1:0] raddr,
  output window_t          rdata
);

  window_t win [MAX_CH];

  always_ff @(posedge clk)
    if (we) win[waddr[$clog2(MAX_CH)-1:0]] <= wdata;

  assign rdata = win[raddr[$clog2(MAX_CH)-1:0]];

endmodule
