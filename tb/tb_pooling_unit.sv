// tb_pooling_unit: feeds groups of four windows of per-channel values (first
// and last marked) and checks that each group yields the per-channel maximum,
// then checks pass-through when every window is both first and last.
module tb_pooling_unit;
  import rram_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, first = 0, last = 0, out_valid;
  oc_idx_t in_oc = '0, out_oc;
  acc_t in_data = '0, out_data;
  pooling_unit #(.NUM_OC(N)) dut (.*);
  int checks = 0, failures = 0, mx [N], nout = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk); rst_n = 1;
    for (int g = 0; g < 6; g++) begin
      int wins;
      wins = (g < 4) ? 4 : 1;
      for (int w = 0; w < wins; w++)
        for (int o = 0; o < N; o++) begin
          int v;
          v = $urandom_range(500, 0);
          if (w == 0 || v > mx[o]) mx[o] = v;
          in_valid = 1; in_oc = oc_idx_t'(o); in_data = acc_t'(v);
          first = (w == 0); last = (w == wins - 1);
          @(negedge clk);
          checks++;
          if (out_valid != last) failures++;
          else if (last) begin
            nout++;
            if (int'(out_oc) != o || int'(out_data) != mx[o]) begin
              failures++; if (failures < 5) $display("oc %0d got %0d exp %0d", o, out_data, mx[o]);
            end
          end
        end
    end
    in_valid = 0; @(negedge clk);
    checks++; if (out_valid || nout != 6 * N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
