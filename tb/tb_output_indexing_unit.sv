// tb_output_indexing_unit: issues random OU tags, supplies the ADC codes two
// cycles later as the real pipeline does, models the index table, and checks
// that each valid lane is written to the output channel stored at
// oc_ptr + lane, with its code, and that no other lane writes.
module tb_output_indexing_unit;
  import rram_pkg::*;
  localparam int L = 8, D = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic issue_valid = 0;
  logic [OCP_AW-1:0] issue_oc_ptr = '0;
  logic [CNT_W-1:0] issue_col_cnt = '0;
  adc_code_t code [L];
  logic [OCP_AW-1:0] oc_raddr;
  oc_idx_t oc_rdata [L];
  logic [L-1:0] wr_en;
  oc_idx_t wr_oc [L];
  adc_code_t wr_val [L];
  oc_idx_t tab [D];
  output_indexing_unit #(.OU_COLS(L), .LATENCY(2)) dut (.*);
  always_comb for (int j = 0; j < L; j++) oc_rdata[j] = tab[(int'(oc_raddr) + j) % D];
  int checks = 0, failures = 0;
  logic v_h [3];
  int p_h [3], n_h [3];
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < D; i++) tab[i] = oc_idx_t'($urandom);
    for (int j = 0; j < L; j++) code[j] = '0;
    for (int i = 0; i < 3; i++) begin v_h[i] = 0; p_h[i] = 0; n_h[i] = 0; end
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      // tag issued two cycles ago meets the codes now
      for (int i = 2; i > 0; i--) begin v_h[i] = v_h[i-1]; p_h[i] = p_h[i-1]; n_h[i] = n_h[i-1]; end
      v_h[0] = ($urandom_range(3, 0) != 0); p_h[0] = $urandom_range(D - L, 0); n_h[0] = $urandom_range(L, 1);
      issue_valid = v_h[0]; issue_oc_ptr = OCP_AW'(p_h[0]); issue_col_cnt = CNT_W'(n_h[0]);
      for (int j = 0; j < L; j++) code[j] = adc_code_t'($urandom);
      #1;
      if (t >= 2)
        for (int j = 0; j < L; j++) begin
          logic e;
          e = v_h[2] && j < n_h[2];
          checks++;
          if (wr_en[j] != e || (e && (wr_oc[j] != tab[p_h[2] + j] || wr_val[j] != code[j]))) failures++;
        end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
