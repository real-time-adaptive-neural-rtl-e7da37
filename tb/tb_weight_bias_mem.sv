// tb_weight_bias_mem: writes every weight and bias of an 18-input,
// 10-neuron layer with a known pattern, then reads every column and checks
// all weights and biases; also checks that out-of-range writes are ignored
// and that an out-of-range column reads as zero.
module tb_weight_bias_mem;
  import rtann_pkg::*;
  localparam int unsigned NI = 18, NO = 10;

  logic clk = 0, wr_en = 0;
  logic [7:0] wr_neuron = '0, wr_sel = '0, rd_idx = '0;
  data_t wr_data = '0;
  data_t w_col [NO], bias [NO];
  int checks = 0, failures = 0;

  weight_bias_mem #(.N_IN(NI), .N_OUT(NO), .SEL_W(8)) dut (.*);

  always #5 clk = ~clk;

  function automatic data_t pat(int j, int i);
    return data_t'(j * 1000 - i * 37 + 5);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int j = 0; j < NO; j++)
      for (int i = 0; i <= NI; i++) begin
        @(negedge clk);
        wr_en = 1; wr_neuron = 8'(j); wr_sel = 8'(i); wr_data = pat(j, i);
      end
    // writes outside the layer must not land anywhere
    @(negedge clk) begin wr_neuron = 8'(NO); wr_sel = 8'd0; wr_data = 16'h5555; end
    @(negedge clk) begin wr_neuron = 8'd0; wr_sel = 8'(NI + 1); wr_data = 16'h6666; end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i <= NI; i++) begin
      rd_idx = 8'(i);
      #1;
      for (int j = 0; j < NO; j++) begin
        checks += 2;
        if (w_col[j] !== ((i < NI) ? pat(j, i) : data_t'(0))) begin failures++; $display("FAIL w[%0d][%0d]=%0d", j, i, w_col[j]); end
        if (bias[j] !== pat(j, NI)) begin failures++; $display("FAIL bias[%0d]", j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
