// tb_bitline_decoder: random OU column ranges; checks the bitline enables and
// the lane-to-bitline routing.
module tb_bitline_decoder;
  import rram_pkg::*;
  localparam int C = 40, L = 8;
  logic valid;
  logic [COL_AW-1:0] col_base;
  logic [CNT_W-1:0] col_cnt;
  logic [C-1:0] bl_en;
  logic [COL_AW-1:0] lane_col [L];
  logic [L-1:0] lane_en;
  bitline_decoder #(.XBAR_COLS(C), .OU_COLS(L)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 500; t++) begin
      int b, n;
      n = $urandom_range(L, 1); b = $urandom_range(C - n, 0);
      valid = ($urandom_range(7, 0) != 0); col_base = COL_AW'(b); col_cnt = CNT_W'(n);
      #1;
      for (int c = 0; c < C; c++) begin
        checks++; if (bl_en[c] != (valid && c >= b && c < b + n)) failures++;
      end
      for (int j = 0; j < L; j++) begin
        checks++;
        if (lane_en[j] != (valid && j < n) || (j < n && int'(lane_col[j]) != b + j)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
