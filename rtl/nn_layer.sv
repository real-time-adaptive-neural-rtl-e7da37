// nn_layer: one fully connected layer of N_OUT neurons working in parallel.
//
// The inputs are presented one per cycle: the layer drives in_idx, the
// previous stage (input vector or layer buffer) returns x_in in the same
// cycle, and every neuron multiplies it by its own weight from the layer's
// weight_bias_mem and accumulates. Hidden layers use ReLU neurons (RELU=1);
// the output layer is built with RELU=0.
//
// Timing: the clock edge that samples start loads the biases; in the N_IN
// cycles after it the layer accumulates inputs 0..N_IN-1; done pulses in the
// next cycle, when y already holds the final outputs (y stays valid until
// the next start). A layer therefore takes N_IN + 1 cycles from start to done.
module nn_layer
  import rtann_pkg::*;
#(
  parameter int unsigned N_IN  = 18,
  parameter int unsigned N_OUT = 18,
  parameter bit          RELU  = 1'b1,
  parameter int unsigned SEL_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic [SEL_W-1:0] in_idx,
  input  data_t            x_in,
  input  logic             wr_en,
  input  logic [SEL_W-1:0] wr_neuron,
  input  logic [SEL_W-1:0] wr_sel,
  input  data_t            wr_data,
  output logic             busy,
  output logic             done,
  output data_t            y [N_OUT]
);

  logic  running;
  data_t w_col [N_OUT];
  data_t bias  [N_OUT];

  weight_bias_mem #(.N_IN(N_IN), .N_OUT(N_OUT), .SEL_W(SEL_W)) u_wb (
    .clk, .wr_en, .wr_neuron, .wr_sel, .wr_data,
    .rd_idx(in_idx), .w_col, .bias
  );

  for (genvar j = 0; j < N_OUT; j++) begin : g_n
    hidden_neuron #(.RELU(RELU)) u_neuron (
      .clk, .rst_n,
      .clr (start && !running),
      .en  (running),
      .x   (x_in),
      .w   (w_col[j]),
      .bias(bias[j]),
      .s   (),
      .y   (y[j])
    );
  end

  assign busy = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      in_idx  <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= 1'b1;
        in_idx  <= '0;
      end else if (running) begin
        if (int'(in_idx) == N_IN-1) begin
          running <= 1'b0;
          done    <= 1'b1;
        end else begin
          in_idx <= in_idx + 1'b1;
        end
      end
    end
  end

endmodule
