// tb_pp_rram_accel: end-to-end test of one computing unit at its default
// size (512x512 crossbar, 9x8 OU, 512 output channels), through
// pp_layer_tester: a random pattern-pruned layer of 24 input and 64 output
// channels with 6 patterns (sizes 4,3,2,1,4,3) plus all-zero, 30 % all-zero
// kernels and 40 % zero activations; four pooled windows and one unpooled.
module tb_pp_rram_accel;
  int checks, failures;
  logic finished;
  pp_layer_tester #(.NCH(24), .NOC(64), .NPAT(6), .MAXSZ(4), .KZERO_PCT(30), .XZERO_PCT(40))
    u_test (.checks, .failures, .finished);
  // watchdog in CU clock cycles
  initial begin
    repeat (2000000) @(posedge u_test.clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  always @(posedge finished) begin
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
