// layer_buffer: the buffer between two layers.
//
// Captures the N outputs of a layer in one cycle (load) and serves them to
// the next layer one at a time through a combinational read port, so the
// next layer sees input rd_idx in the same cycle as its weights. All N
// words are also available in parallel (q), which the argmax uses after the
// output layer. Out-of-range indices read as 0.
module layer_buffer
  import rtann_pkg::*;
#(
  parameter int unsigned N     = 18,
  parameter int unsigned SEL_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  data_t            d [N],
  input  logic [SEL_W-1:0] rd_idx,
  output data_t            rd_data,
  output data_t            q [N]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) q[i] <= '0;
    end else if (load) begin
      q <= d;
    end
  end

  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1;
  assign rd_data = (int'(rd_idx) < N) ? q[IDX_W'(rd_idx)] : data_t'(0);

endmodule
