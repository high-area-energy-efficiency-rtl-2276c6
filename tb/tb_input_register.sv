// tb_input_register: writes a random window into every channel entry, then
// reads them back in random order and compares with a model.
module tb_input_register;
  import rram_pkg::*;
  localparam int MAX_CH = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [CH_AW-1:0] waddr = '0, raddr = '0;
  window_t wdata = '0, rdata;
  window_t m [MAX_CH];
  input_register #(.MAX_CH(MAX_CH)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk);
    for (int i = 0; i < MAX_CH; i++) begin
      we = 1; waddr = CH_AW'(i);
      for (int k = 0; k < KPOS; k++) wdata[k] = act_t'($urandom);
      m[i] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int t = 0; t < 100; t++) begin
      raddr = CH_AW'($urandom_range(MAX_CH-1, 0));
      #1; checks++;
      if (rdata != m[raddr]) begin failures++; $display("ch %0d mismatch", raddr); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
