// nn_controller: the controller unit of one neural-network model.
//
// Runs the NUM_LAYERS layers (hidden layers, then the output layer) one after
// the other. On start it starts layer 0; when layer l reports done it loads
// buffer l with the layer's outputs in that same cycle and starts layer l+1
// in the next one. After the output layer's buffer is loaded it enables the
// argmax for one cycle and reports done when the argmax result is valid.
// cur_layer tells which layer is working. The source names the controller
// but not its sequence; strictly layer-by-layer operation is this design's
// choice.
//
// Timing: a model with layer input counts n_0..n_{L-1} finishes
// sum(n_l + 2) + 3 cycles after start.
module nn_controller #(
  parameter int unsigned NUM_LAYERS = 4,
  localparam int unsigned LAYER_W = $clog2(NUM_LAYERS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               layer_start [NUM_LAYERS],
  input  logic               layer_done  [NUM_LAYERS],
  output logic               buf_load    [NUM_LAYERS],
  output logic               argmax_en,
  input  logic               argmax_valid,
  output logic               busy,
  output logic               done,
  output logic [LAYER_W-1:0] cur_layer
);

  logic cur_done;   // the working layer has finished

  always_comb begin
    cur_done = 1'b0;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      buf_load[l] = busy && layer_done[l] && (int'(cur_layer) == l);
      cur_done    = cur_done | buf_load[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      argmax_en <= 1'b0;
      cur_layer <= '0;
      for (int l = 0; l < NUM_LAYERS; l++) layer_start[l] <= 1'b0;
    end else begin
      done      <= 1'b0;
      argmax_en <= 1'b0;
      for (int l = 0; l < NUM_LAYERS; l++) layer_start[l] <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy           <= 1'b1;
          cur_layer      <= '0;
          layer_start[0] <= 1'b1;
        end
      end else begin
        if (cur_done) begin
          if (int'(cur_layer) == NUM_LAYERS-1) begin
            argmax_en <= 1'b1;
            cur_layer <= LAYER_W'(NUM_LAYERS);   // past the last layer
          end else begin
            layer_start[int'(cur_layer) + 1] <= 1'b1;
            cur_layer <= cur_layer + 1'b1;
          end
        end
        if (argmax_valid) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
