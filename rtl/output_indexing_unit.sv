// output_indexing_unit: puts the out-of-order bitline results back in output
// channel order.
//
// Reordered kernels mean that bitline j of an OU belongs to whatever output
// channel the weight index buffer lists at (oc_ptr + j). The unit delays each
// issued OU's oc_ptr and lane count by LATENCY cycles (the sample-and-hold
// plus ADC delay) so that they meet the ADC codes, reads the OU_COLS output
// channel indexes from the index buffer, and presents one (output channel,
// code) write per valid lane to the add / output register stage.
// Combinational from the ADC codes to the writes; LATENCY pipeline registers
// for the OU tags.
module output_indexing_unit import rram_pkg::*; #(
  parameter int OU_COLS = 8,
  parameter int LATENCY = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // OU tag at issue time
  input  logic              issue_valid,
  input  logic [OCP_AW-1:0] issue_oc_ptr,
  input  logic [CNT_W-1:0]  issue_col_cnt,
  // ADC lane codes, LATENCY cycles after issue
  input  adc_code_t         code [OU_COLS],
  // weight index buffer read
  output logic [OCP_AW-1:0] oc_raddr,
  input  oc_idx_t           oc_rdata [OU_COLS],
  // writes to the output register
  output logic [OU_COLS-1:0] wr_en,
  output oc_idx_t           wr_oc  [OU_COLS],
  output adc_code_t         wr_val [OU_COLS]
);

  logic              v_q   [LATENCY];
  logic [OCP_AW-1:0] ptr_q [LATENCY];
  logic [CNT_W-1:0]  cnt_q [LATENCY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LATENCY; i++) begin
        v_q[i]   <= 1'b0;
        ptr_q[i] <= '0;
        cnt_q[i] <= '0;
      end
    end else begin
      v_q[0]   <= issue_valid;
      ptr_q[0] <= issue_oc_ptr;
      cnt_q[0] <= issue_col_cnt;
      for (int i = 1; i < LATENCY; i++) begin
        v_q[i]   <= v_q[i-1];
        ptr_q[i] <= ptr_q[i-1];
        cnt_q[i] <= cnt_q[i-1];
      end
    end
  end

  assign oc_raddr = ptr_q[LATENCY-1];

  always_comb begin
    for (int j = 0; j < OU_COLS; j++) begin
      wr_en[j]  = v_q[LATENCY-1] && (j < int'(cnt_q[LATENCY-1]));
      wr_oc[j]  = oc_rdata[j];
      wr_val[j] = code[j];
    end
  end

endmodule
