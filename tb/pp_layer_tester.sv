// pp_layer_tester: end-to-end test harness for one computing unit, shared by
// the top-level and workload testbenches.
//
// It builds a random pattern-pruned 3x3 layer (NCH input channels, NOC output
// channels, a library of NPAT patterns of sizes MAXSZ, MAXSZ-1, ..., 1, ...
// plus the all-zero pattern), maps it itself with the kernel-reordering
// scheme (gather kernels by pattern, drop zeros, sort blocks by size, place
// each block below the previous one when the rows left allow it, else in new
// columns), programs the crossbar and the index tables through the CU's
// ports, and runs windows. Expected results come straight from the original
// (unmapped) kernels: per input channel and output channel the dot product,
// quantised like the ADC (arithmetic shift by 3, saturate to 8 bits), summed
// over channels, then ReLU and 2x2 max pooling. It also checks the OU count,
// the all-zero skip count, the placement decisions and the cycle count of a
// window against numbers worked out from the mapping, and counts that every
// mechanism (skip, below/new-column placement, multi-OU block, empty channel,
// pooling on and off) occurred. Channel 0 gets 12 kernels of one pattern (a
// block wider than an OU) and channel 5 only all-zero kernels.
// The CU is instantiated with its default parameters. Results are returned
// through checks/failures; finished rises at the end.
module pp_layer_tester #(
  parameter int NCH       = 24,   // input channels
  parameter int NOC       = 64,   // output channels
  parameter int NPAT      = 6,    // non-zero patterns in the layer's library
  parameter int MAXSZ     = 4,    // largest pattern size; sizes cycle MAXSZ..1
  parameter int KZERO_PCT = 30,   // share of all-zero kernels
  parameter int XZERO_PCT = 40    // share of zero activations
) (
  output int checks,
  output int failures,
  output logic finished
);
  import rram_pkg::*;

  localparam int NWIN = 5;   // 4 pooled windows, then one without pooling

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [CH_AW-1:0]  num_ch;
  logic [OC_AW:0]    num_oc;
  logic              pool_en;
  logic              xb_we;  logic [ROW_AW-1:0] xb_row; logic [COL_AW-1:0] xb_col; weight_t xb_data;
  logic              ch_we;  logic [CH_AW-1:0] ch_waddr; logic [NPAT_W-1:0] ch_wdata;
  logic              pat_we; logic [PAT_AW-1:0] pat_waddr; pattern_entry_t pat_wdata;
  logic              oc_we;  logic [OCP_AW-1:0] oc_waddr; oc_idx_t oc_wdata;
  logic              in_we;  logic [CH_AW-1:0] in_ch; window_t in_win;
  logic              start, busy, done, out_valid;
  oc_idx_t           out_oc;
  acc_t              out_data;
  logic [31:0]       ou_count, skip_count, newcol_count, below_count;

  pp_rram_accel dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc++;


  // layer
  logic [KPOS-1:0] lib_mask [NPAT];
  int  lib_size [NPAT];
  int  kpat [NCH][NOC];           // pattern id per kernel, NPAT = all-zero
  int  w    [NCH][NOC][KPOS];
  int  x    [NWIN][NCH][KPOS];
  // mapping results per channel
  int  nblk [NCH];
  int  blk_pat [NCH][NPAT];
  int  blk_w   [NCH][NPAT];
  int  exp_below, exp_newcol;

  function automatic int popc(logic [KPOS-1:0] m);
    int n = 0;
    for (int k = 0; k < KPOS; k++) n += int'(m[k]);
    return n;
  endfunction

  function automatic int adcq(int s);
    int q = s >>> 3;
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return q;
  endfunction

  // mechanism counters
  int n_skip = 0, n_below = 0, n_newcol = 0, n_multi_ou = 0, n_empty_ch = 0, n_pool = 0, n_nopool = 0;

  task automatic tick(); @(negedge clk); endtask

  task automatic build_layer();
    for (int p = 0; p < NPAT; p++) begin
      logic [KPOS-1:0] m;
      logic dup;
      lib_size[p] = MAXSZ - (p % MAXSZ);
      do begin
        m = '0;
        while (popc(m) < lib_size[p]) m[$urandom_range(KPOS-1, 0)] = 1'b1;
        dup = 1'b0;
        for (int q = 0; q < p; q++) if (lib_mask[q] == m) dup = 1'b1;
      end while (dup);
      lib_mask[p] = m;
    end
    for (int c = 0; c < NCH; c++)
      for (int o = 0; o < NOC; o++) begin
        int r = $urandom_range(99, 0);
        kpat[c][o] = (r < KZERO_PCT) ? NPAT : int'($urandom_range(NPAT-1, 0));
        if (c == 0 && o < 12) kpat[c][o] = 0;     // a block wider than one OU
        if (c == 5) kpat[c][o] = NPAT;            // an all-zero channel
        for (int k = 0; k < KPOS; k++) begin
          int v;
          do v = int'($urandom_range(15, 0)) - 8; while (v == 0);
          w[c][o][k] = (kpat[c][o] < NPAT && lib_mask[kpat[c][o]][k]) ? v : 0;
        end
      end
  endtask

  // kernel reorder, compress, place; program crossbar and index tables
  task automatic map_layer();
    int region_base = 0, pat_ptr = 0, oc_ptr = 0;
    exp_below = 0; exp_newcol = 0;
    for (int c = 0; c < NCH; c++) begin
      int order [NPAT];
      int n = 0;
      int cur_row, cur_h, cur_col, col_next, reg_h;
      // patterns present, by decreasing size (stable)
      for (int s = KPOS; s >= 1; s--)
        for (int p = 0; p < NPAT; p++)
          if (popc(lib_mask[p]) == s) begin
            int cnt = 0;
            for (int o = 0; o < NOC; o++) if (kpat[c][o] == p) cnt++;
            if (cnt > 0) begin order[n] = p; blk_w[c][n] = cnt; blk_pat[c][n] = p; n++; end
          end
      nblk[c] = n;
      tick(); ch_we = 1; ch_waddr = CH_AW'(c); ch_wdata = NPAT_W'(n); tick(); ch_we = 0;
      cur_row = 0; cur_h = 0; cur_col = 0; col_next = 0; reg_h = 0;
      for (int b = 0; b < n; b++) begin
        int p = order[b];
        int sz = popc(lib_mask[p]);
        int row, col, k;
        if (b == 0) begin row = 0; col = 0; reg_h = sz; end
        else if (reg_h - (cur_row + cur_h) >= sz) begin row = cur_row + cur_h; col = cur_col; exp_below++; end
        else begin row = 0; col = col_next; exp_newcol++; end
        cur_row = row; cur_h = sz; cur_col = col;
        if (col + blk_w[c][b] > col_next) col_next = col + blk_w[c][b];
        pat_we = 1; pat_waddr = PAT_AW'(pat_ptr);
        pat_wdata.mask = lib_mask[p]; pat_wdata.size = SIZE_W'(sz); pat_wdata.count = CNT_W'(blk_w[c][b]);
        tick(); pat_we = 0; pat_ptr++;
        k = 0;
        for (int o = 0; o < NOC; o++) if (kpat[c][o] == p) begin
          int i = 0;
          oc_we = 1; oc_waddr = OCP_AW'(oc_ptr); oc_wdata = oc_idx_t'(o); tick(); oc_we = 0; oc_ptr++;
          for (int q = 0; q < KPOS; q++) if (lib_mask[p][q]) begin
            xb_we = 1; xb_row = ROW_AW'(region_base + row + i); xb_col = COL_AW'(col + k);
            xb_data = weight_t'(w[c][o][q]); tick(); xb_we = 0; i++;
          end
          k++;
        end
      end
      region_base += reg_h;
    end
    $display("mapped: %0d rows used, %0d patterns, %0d kernels", region_base, pat_ptr, oc_ptr);
  endtask

  task automatic run_window(input int wi, input logic pen, input int pool_pos,
                            inout int pool_max [NOC]);
    int exp_acc [NOC];
    int exp_ou = 0, exp_skip = 0, exp_cycles = 0;
    int ou0, sk0, nc0, bl0, t0;
    int got = 0;
    tick();
    for (int c = 0; c < NCH; c++) begin
      in_we = 1; in_ch = CH_AW'(c);
      for (int k = 0; k < KPOS; k++) in_win[k] = act_t'(x[wi][c][k]);
      tick();
    end
    in_we = 0;
    // reference
    for (int o = 0; o < NOC; o++) begin
      exp_acc[o] = 0;
      for (int c = 0; c < NCH; c++) begin
        int s = 0;
        for (int k = 0; k < KPOS; k++) s += x[wi][c][k] * w[c][o][k];
        exp_acc[o] += adcq(s);
      end
    end
    exp_cycles = 1;                                     // final channel check
    for (int c = 0; c < NCH; c++) begin
      exp_cycles++;                                     // channel table read
      for (int b = 0; b < nblk[c]; b++) begin
        logic nz = 0;
        for (int k = 0; k < KPOS; k++) if (lib_mask[blk_pat[c][b]][k] && x[wi][c][k] != 0) nz = 1;
        exp_cycles++;                                   // pattern entry read
        if (!nz) exp_skip++;
        else begin
          exp_ou += (blk_w[c][b] + 7) / 8;
          exp_cycles += (blk_w[c][b] + 7) / 8;
        end
      end
    end
    exp_cycles += 2 + NOC + 1;                          // drain, read-out, done
    ou0 = ou_count; sk0 = skip_count; nc0 = newcol_count; bl0 = below_count;
    pool_en = pen; start = 1; tick(); start = 0; t0 = cyc;
    while (!done) begin
      @(posedge clk);
      #1;
      if (out_valid) begin
        int e = (exp_acc[int'(out_oc)] < 0) ? 0 : exp_acc[int'(out_oc)];
        if (pen) e = (pool_pos == 0 || e > pool_max[int'(out_oc)]) ? e : pool_max[int'(out_oc)];
        checks++; got++;
        if (int'(out_data) != e) begin
          failures++;
          if (failures < 10) $display("win %0d oc %0d: got %0d exp %0d", wi, out_oc, out_data, e);
        end
      end
    end
    // running maximum for the pooling reference
    for (int o = 0; o < NOC; o++) begin
      int e = (exp_acc[o] < 0) ? 0 : exp_acc[o];
      if (pool_pos == 0 || e > pool_max[o]) pool_max[o] = e;
    end
    checks++; if (got != ((!pen || pool_pos == 3) ? NOC : 0)) begin failures++; $display("win %0d: %0d outputs", wi, got); end
    checks++; if (int'(ou_count) - ou0 != exp_ou) begin failures++; $display("OUs %0d exp %0d", int'(ou_count) - ou0, exp_ou); end
    checks++; if (int'(skip_count) - sk0 != exp_skip) begin failures++; $display("skips %0d exp %0d", int'(skip_count) - sk0, exp_skip); end
    checks++; if (int'(newcol_count) - nc0 != exp_newcol || int'(below_count) - bl0 != exp_below) begin
      failures++; $display("placement newcol %0d below %0d", int'(newcol_count) - nc0, int'(below_count) - bl0); end
    checks++; if (cyc - t0 != exp_cycles) begin failures++; $display("cycles %0d exp %0d", cyc - t0, exp_cycles); end
    n_skip += exp_skip; n_below += exp_below; n_newcol += exp_newcol;
    if (pen) n_pool++; else n_nopool++;
    $display("window %0d: %0d OUs, %0d skipped blocks, %0d cycles", wi, exp_ou, exp_skip, cyc - t0);
  endtask

  int pool_max [NOC];

  initial begin
    checks = 0; failures = 0; finished = 1'b0;
    num_ch = CH_AW'(NCH); num_oc = (OC_AW+1)'(NOC); pool_en = 0; start = 0;
    xb_we = 0; ch_we = 0; pat_we = 0; oc_we = 0; in_we = 0;
    xb_row = '0; xb_col = '0; xb_data = '0; ch_waddr = '0; ch_wdata = '0;
    pat_waddr = '0; pat_wdata = '0; oc_waddr = '0; oc_wdata = '0; in_ch = '0; in_win = '0;
    build_layer();
    for (int i = 0; i < NWIN; i++)
      for (int c = 0; c < NCH; c++)
        for (int k = 0; k < KPOS; k++)
          x[i][c][k] = ($urandom_range(99, 0) < XZERO_PCT) ? 0 : int'($urandom_range(15, 1));
    repeat (3) tick();
    rst_n = 1;
    map_layer();
    for (int c = 0; c < NCH; c++) begin
      if (nblk[c] == 0) n_empty_ch++;
      for (int b = 0; b < nblk[c]; b++) if (blk_w[c][b] > 8) n_multi_ou++;
    end
    for (int i = 0; i < 4; i++) run_window(i, 1'b1, i, pool_max);
    run_window(4, 1'b0, 0, pool_max);
    $display("mechanisms: skip %0d below %0d newcol %0d multi-OU blocks %0d empty channels %0d pooled %0d unpooled %0d",
             n_skip, n_below, n_newcol, n_multi_ou, n_empty_ch, n_pool, n_nopool);
    checks++; if (n_skip == 0)     begin failures++; $display("no all-zero skip happened"); end
    checks++; if (n_below == 0)    begin failures++; $display("no below placement happened"); end
    checks++; if (n_newcol == 0)   begin failures++; $display("no new-column placement happened"); end
    checks++; if (n_multi_ou == 0) begin failures++; $display("no multi-OU block"); end
    checks++; if (n_empty_ch == 0) begin failures++; $display("no empty channel"); end
    checks++; if (n_pool == 0 || n_nopool == 0) begin failures++; $display("pooling mode not switched"); end
    finished = 1'b1;
  end

endmodule
