// tb_wordline_decoder: random OU row ranges and input offsets on a small
// crossbar; checks each row's enable and driven activation.
module tb_wordline_decoder;
  import rram_pkg::*;
  localparam int R = 40;
  logic valid;
  logic [ROW_AW-1:0] row_base;
  logic [SIZE_W-1:0] row_cnt, in_off;
  window_t packed_in;
  logic [R-1:0] wl_en;
  act_t wl_in [R];
  wordline_decoder #(.XBAR_ROWS(R)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 500; t++) begin
      int b, n, o;
      n = $urandom_range(9, 1); o = $urandom_range(9 - n, 0); b = $urandom_range(R - n, 0);
      valid = ($urandom_range(7, 0) != 0); row_base = ROW_AW'(b); row_cnt = SIZE_W'(n); in_off = SIZE_W'(o);
      for (int k = 0; k < KPOS; k++) packed_in[k] = act_t'($urandom_range(15, 1));
      #1;
      for (int r = 0; r < R; r++) begin
        logic en;
        en = valid && r >= b && r < b + n;
        checks++;
        if (wl_en[r] != en || wl_in[r] != (en ? packed_in[r - b + o] : act_t'(0))) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
