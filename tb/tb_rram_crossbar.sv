// tb_rram_crossbar: programs a small crossbar with random signed weights,
// applies random wordline/bitline activations and inputs, and compares the
// sampled lane sums (one cycle later) with dot products computed here.
module tb_rram_crossbar;
  import rram_pkg::*;
  localparam int R = 24, C = 24, L = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic w_we = 0;
  logic [ROW_AW-1:0] w_row = '0;
  logic [COL_AW-1:0] w_col = '0;
  weight_t w_data = '0;
  logic [R-1:0] wl_en = '0;
  act_t wl_in [R];
  logic [C-1:0] bl_en = '0;
  logic [COL_AW-1:0] lane_col [L];
  logic [L-1:0] lane_en = '0;
  colsum_t held [L];
  logic [L-1:0] held_valid;
  int g [R][C];
  rram_crossbar #(.XBAR_ROWS(R), .XBAR_COLS(C), .OU_COLS(L)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < R; r++) wl_in[r] = '0;
    for (int j = 0; j < L; j++) lane_col[j] = '0;
    @(negedge clk);
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        w_we = 1; w_row = ROW_AW'(r); w_col = COL_AW'(c);
        g[r][c] = int'($urandom_range(15, 0)) - 8; w_data = weight_t'(g[r][c]);
        @(negedge clk);
      end
    w_we = 0;
    for (int t = 0; t < 300; t++) begin
      int b, n, cb;
      int e [L];
      logic ev [L];
      b = $urandom_range(R - 9, 0); n = $urandom_range(9, 1); cb = $urandom_range(C - L, 0);
      for (int r = 0; r < R; r++) begin
        wl_en[r] = (r >= b && r < b + n);
        wl_in[r] = wl_en[r] ? act_t'($urandom) : act_t'(0);
      end
      for (int j = 0; j < L; j++) begin
        lane_col[j] = COL_AW'(cb + j);
        lane_en[j] = ($urandom_range(3, 0) != 0);
        bl_en[cb + j] = lane_en[j];
        ev[j] = lane_en[j];
        e[j] = 0;
        if (ev[j]) for (int r = b; r < b + n; r++) e[j] += int'(wl_in[r]) * g[r][cb + j];
      end
      @(negedge clk);
      for (int j = 0; j < L; j++) begin
        checks++;
        if (held_valid[j] != ev[j] || (ev[j] && int'(held[j]) != e[j])) begin
          failures++; if (failures < 5) $display("lane %0d got %0d exp %0d", j, held[j], e[j]);
        end
      end
      bl_en = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
