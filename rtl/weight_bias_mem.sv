// weight_bias_mem: weight and bias store of one layer.
//
// Holds N_OUT x N_IN weights and N_OUT biases. All neurons of the layer work
// on the same input at the same time, so a read returns one column: the
// weight of input rd_idx for every neuron, plus all biases. The trained
// values are written once through the write port; wr_sel = N_IN addresses
// the bias. The read is combinational, as in a distributed (LUT) memory;
// the published models use no block RAM. The column organisation and the
// write port are this design's choice.
//
// Interface: wr_en/wr_neuron/wr_sel/wr_data; rd_idx -> w_col[N_OUT], bias[N_OUT].
module weight_bias_mem
  import rtann_pkg::*;
#(
  parameter int unsigned N_IN  = 18,
  parameter int unsigned N_OUT = 18,
  parameter int unsigned SEL_W = 8
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [SEL_W-1:0] wr_neuron,
  input  logic [SEL_W-1:0] wr_sel,
  input  data_t            wr_data,
  input  logic [SEL_W-1:0] rd_idx,
  output data_t            w_col [N_OUT],
  output data_t            bias  [N_OUT]
);

  // index widths of the two memory dimensions (range checked before use)
  localparam int unsigned IN_W  = (N_IN  > 1) ? $clog2(N_IN)  : 1;
  localparam int unsigned OUT_W = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  data_t w_mem [N_OUT][N_IN];
  data_t b_mem [N_OUT];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_neuron) < N_OUT) begin
      if (int'(wr_sel) < N_IN)       w_mem[OUT_W'(wr_neuron)][IN_W'(wr_sel)] <= wr_data;
      else if (int'(wr_sel) == N_IN) b_mem[OUT_W'(wr_neuron)]                <= wr_data;
    end
  end

  always_comb begin
    for (int j = 0; j < N_OUT; j++) begin
      w_col[j] = (int'(rd_idx) < N_IN) ? w_mem[j][IN_W'(rd_idx)] : data_t'(0);
      bias[j]  = b_mem[j];
    end
  end

endmodule
