// tb_output_accumulator: random multi-lane writes to distinct output channels
// with signed ADC codes, against a model; then clear.
module tb_output_accumulator;
  import rram_pkg::*;
  localparam int N = 32, L = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0;
  logic [L-1:0] wr_en = '0;
  oc_idx_t wr_oc [L];
  adc_code_t wr_val [L];
  oc_idx_t rd_oc = '0;
  acc_t rd_data;
  int m [N];
  output_accumulator #(.NUM_OC(N), .LANES(L)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check_all();
    for (int o = 0; o < N; o++) begin
      rd_oc = oc_idx_t'(o); #1; checks++;
      if (int'(rd_data) != m[o]) begin failures++; if (failures < 5) $display("oc %0d got %0d exp %0d", o, rd_data, m[o]); end
    end
  endtask
  initial begin
    for (int j = 0; j < L; j++) begin wr_oc[j] = '0; wr_val[j] = '0; end
    for (int o = 0; o < N; o++) m[o] = 0;
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int perm [N];
      for (int o = 0; o < N; o++) perm[o] = o;
      perm.shuffle();
      for (int j = 0; j < L; j++) begin
        wr_en[j] = ($urandom_range(3, 0) != 0);
        wr_oc[j] = oc_idx_t'(perm[j]);
        wr_val[j] = adc_code_t'($urandom);
        if (wr_en[j]) m[perm[j]] += int'(wr_val[j]);
      end
      @(negedge clk);
    end
    wr_en = '0;
    check_all();
    clear = 1; @(negedge clk); clear = 0;
    for (int o = 0; o < N; o++) m[o] = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
