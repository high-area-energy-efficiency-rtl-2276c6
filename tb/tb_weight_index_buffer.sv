// tb_weight_index_buffer: writes random channel, pattern and output-channel
// index entries and reads them back, including the OU_COLS consecutive
// output-channel reads an OU needs, against a model array.
module tb_weight_index_buffer;
  import rram_pkg::*;
  localparam int MAX_CH = 16, PAT_DEPTH = 64, OC_DEPTH = 256, OU_COLS = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic ch_we = 0, pat_we = 0, oc_we = 0;
  logic [CH_AW-1:0] ch_waddr = '0, ch_raddr = '0;
  logic [NPAT_W-1:0] ch_wdata = '0, ch_rdata;
  logic [PAT_AW-1:0] pat_waddr = '0, pat_raddr = '0;
  pattern_entry_t pat_wdata = '0, pat_rdata;
  logic [OCP_AW-1:0] oc_waddr = '0, oc_raddr = '0;
  oc_idx_t oc_wdata = '0;
  oc_idx_t oc_rdata [OU_COLS];
  weight_index_buffer #(.MAX_CH(MAX_CH), .PAT_DEPTH(PAT_DEPTH), .OC_DEPTH(OC_DEPTH), .OU_COLS(OU_COLS)) dut (.*);
  int checks = 0, failures = 0;
  logic [NPAT_W-1:0] m_ch [MAX_CH];
  pattern_entry_t m_pat [PAT_DEPTH];
  oc_idx_t m_oc [OC_DEPTH];
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk);
    for (int i = 0; i < OC_DEPTH; i++) begin
      oc_we = 1; oc_waddr = OCP_AW'(i); oc_wdata = oc_idx_t'($urandom); m_oc[i] = oc_wdata;
      pat_we = (i < PAT_DEPTH); pat_waddr = PAT_AW'(i % PAT_DEPTH); pat_wdata = pattern_entry_t'($urandom);
      if (i < PAT_DEPTH) m_pat[i] = pat_wdata;
      ch_we = (i < MAX_CH); ch_waddr = CH_AW'(i % MAX_CH); ch_wdata = NPAT_W'($urandom);
      if (i < MAX_CH) m_ch[i] = ch_wdata;
      @(negedge clk);
    end
    oc_we = 0; pat_we = 0; ch_we = 0;
    for (int t = 0; t < 200; t++) begin
      int a;
      a = $urandom_range(OC_DEPTH - OU_COLS, 0);
      ch_raddr = CH_AW'($urandom_range(MAX_CH-1, 0));
      pat_raddr = PAT_AW'($urandom_range(PAT_DEPTH-1, 0));
      oc_raddr = OCP_AW'(a);
      #1;
      checks++; if (ch_rdata != m_ch[ch_raddr]) failures++;
      checks++; if (pat_rdata != m_pat[pat_raddr]) failures++;
      for (int j = 0; j < OU_COLS; j++) begin
        checks++; if (oc_rdata[j] != m_oc[a + j]) failures++;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
