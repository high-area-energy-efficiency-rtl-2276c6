// tb_control_unit: drives the control unit with index tables held in the
// testbench and checks the exact OU sequence it issues.
//
// Channel 0 is the five-block example of the mapping strategy (blocks of
// size x width 4x5, 3x4, 2x5, 1x6, 1x3) with a 4x4 OU: the expected
// placement is A at (0,0), B right of A, C in new columns at (0,9), D below
// C at (2,9), E below D at (3,9), cut into 8 OUs. Channel 1 has no stored
// pattern. Channel 2 holds a 6-row block, split into row steps of 4 and 2,
// and a 2-row block whose inputs are all zero, which must be skipped. The
// read-out sequence, pooling first/last flags and the cycle count are also
// checked.
module tb_control_unit;
  import rram_pkg::*;
  localparam int OU_R = 4, OU_C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, pool_en = 0;
  logic [CH_AW-1:0] num_ch = 3;
  logic [OC_AW:0] num_oc = 5;
  logic [CH_AW-1:0] ch_raddr;
  logic [NPAT_W-1:0] ch_npat;
  logic [PAT_AW-1:0] pat_raddr;
  pattern_entry_t pat;
  logic [KPOS-1:0] ipu_mask;
  logic ipu_all_zero;
  ou_cmd_t ou;
  logic acc_clear, rd_valid, rd_first, rd_last, busy, done;
  logic [OC_AW-1:0] rd_oc;
  logic [31:0] ou_count, skip_count, newcol_count, below_count;

  control_unit #(.XBAR_ROWS(64), .OU_ROWS(OU_R), .OU_COLS(OU_C), .POOL_WIN(4)) dut (.*);

  // index tables
  logic [NPAT_W-1:0] ch_tab [3] = '{4'd5, 4'd0, 4'd2};
  pattern_entry_t pat_tab [7];
  logic [KPOS-1:0] zero_mask;   // channel 2: positions whose inputs are zero
  assign ch_npat = ch_tab[ch_raddr];
  assign pat = pat_tab[pat_raddr];
  assign ipu_all_zero = ((ipu_mask & ~zero_mask) == '0);
  assign zero_mask = (ch_raddr == 2) ? 9'b111000000 : 9'b000000000;

  // expected OUs: row_base, row_cnt, col_base, col_cnt, in_off, oc_ptr
  int exp_ou [11][6] = '{
    '{0, 4, 0, 4, 0, 0},  '{0, 4, 4, 1, 0, 4},     // A
    '{0, 3, 5, 4, 0, 5},                          // B
    '{0, 2, 9, 4, 0, 9},  '{0, 2, 13, 1, 0, 13},  // C
    '{2, 1, 9, 4, 0, 14}, '{2, 1, 13, 2, 0, 18},  // D
    '{3, 1, 9, 3, 0, 20},                         // E
    '{4, 4, 0, 4, 0, 23}, '{4, 4, 4, 1, 0, 27},   // channel 2, 6-row block, rows 0-3
    '{8, 2, 0, 4, 4, 23}                          // ... rows 4-5 (then col 4 below)
  };
  int checks = 0, failures = 0;
  int n_ou = 0, n_rd = 0;

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && ou.valid && !pool_en) begin
    int k;
    k = n_ou;
    if (k == 11) k = -1;   // last row step of column 4 of the 6-row block
    checks++;
    if (k >= 0) begin
      if (int'(ou.row_base) != exp_ou[k][0] || int'(ou.row_cnt) != exp_ou[k][1] ||
          int'(ou.col_base) != exp_ou[k][2] || int'(ou.col_cnt) != exp_ou[k][3] ||
          int'(ou.in_off) != exp_ou[k][4] || int'(ou.oc_ptr) != exp_ou[k][5]) begin
        failures++;
        $display("OU %0d: row %0d+%0d col %0d+%0d off %0d ptr %0d", n_ou, ou.row_base, ou.row_cnt,
                 ou.col_base, ou.col_cnt, ou.in_off, ou.oc_ptr);
      end
    end else if (ou.row_base != 8 || ou.row_cnt != 2 || ou.col_base != 4 || ou.col_cnt != 1 ||
                 ou.in_off != 4 || ou.oc_ptr != 27) begin
      failures++; $display("OU 11 wrong");
    end
    n_ou++;
  end

  always @(posedge clk) if (rst_n && rd_valid) begin
    checks++;
    if (int'(rd_oc) != n_rd % 5) failures++;
    n_rd++;
  end

  task automatic run(input logic pen, output int cycles);
    int t0;
    t0 = 0;
    @(negedge clk); pool_en = pen; start = 1;
    @(posedge clk); #1; start = 0;
    checks++; if (!busy) failures++;
    while (!done) begin @(posedge clk); t0++; #1; end
    cycles = t0;
  endtask

  initial begin
    int cyc;
    pat_tab[0] = '{mask: 9'b000001111, size: 4, count: 5};
    pat_tab[1] = '{mask: 9'b000000111, size: 3, count: 4};
    pat_tab[2] = '{mask: 9'b000011000, size: 2, count: 5};
    pat_tab[3] = '{mask: 9'b000100000, size: 1, count: 6};
    pat_tab[4] = '{mask: 9'b010000000, size: 1, count: 3};
    pat_tab[5] = '{mask: 9'b000111111, size: 6, count: 5};
    pat_tab[6] = '{mask: 9'b011000000, size: 2, count: 4};   // inputs all zero
    repeat (2) @(negedge clk); rst_n = 1;
    run(1'b0, cyc);
    checks++; if (n_ou != 12) begin failures++; $display("%0d OUs", n_ou); end
    checks++; if (skip_count != 1) begin failures++; $display("skips %0d", skip_count); end
    checks++; if (newcol_count != 3 || below_count != 2) begin failures++; $display("placement %0d %0d", newcol_count, below_count); end
    checks++; if (n_rd != 5) failures++;
    // 1 + 3 channel reads + 7 entries + 12 OUs + 2 drain + 5 read-out + done
    checks++; if (cyc != 1 + 3 + 7 + 12 + 2 + 5 + 1) begin failures++; $display("cycles %0d", cyc); end
    // pooling: first/last flags across four windows
    for (int w = 0; w < 4; w++) begin
      int fc, lc;
      fc = 0; lc = 0;
      fork
        run(1'b1, cyc);
        forever @(posedge clk) if (rd_valid) begin fc += int'(rd_first); lc += int'(rd_last); end
      join_any
      disable fork;
      checks++;
      if (fc != (w == 0 ? 5 : 0) || lc != (w == 3 ? 5 : 0)) begin failures++; $display("win %0d flags %0d %0d", w, fc, lc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
