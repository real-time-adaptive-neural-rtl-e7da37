// dnn: one neural-network model of the ensemble (one reconfigurable module).
//
// A multilayer perceptron with NUM_HIDDEN hidden layers of HIDDEN[l] ReLU
// neurons, an output layer of N_CLASSES linear neurons and an argmax that
// turns the output layer into a class number and a one-hot label. Between
// layers sits a layer_buffer; a controller unit runs the layers in turn.
// This is the structure of the model diagram. The five ensemble members
// differ only in NUM_HIDDEN and HIDDEN (see rtann_pkg::hidden_size); the
// default is model NN1 of the vehicle configuration, (18,18,10) with 18
// inputs and 4 classes.
//
// Each layer has one multiplier per neuron and takes one input per cycle,
// so layer l costs (inputs of l) + 2 cycles including the controller's
// hand-over; NN1/vehicle needs 18+18+18+10 + 4*2 + 3 = 75 cycles.
//
// Interface: x is the input vector, held from start to done. The weights
// and biases are written through wr_*: wr_layer selects the layer (the
// output layer is layer NUM_HIDDEN), wr_neuron the neuron, wr_sel the input
// (wr_sel = number of inputs of that layer selects the bias). class_idx and
// one_hot are valid from the done pulse until the next start.
module dnn
  import rtann_pkg::*;
#(
  parameter int unsigned N_INPUTS   = 18,
  parameter int unsigned NUM_HIDDEN = 3,
  parameter int unsigned HIDDEN [MAX_HIDDEN] = '{18, 18, 10},
  parameter int unsigned N_CLASSES  = 4,
  localparam int unsigned NUM_LAYERS = NUM_HIDDEN + 1,
  localparam int unsigned CLS_W      = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  localparam int unsigned SEL_W      = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  data_t            x [N_INPUTS],
  input  logic             wr_en,
  input  logic [1:0]       wr_layer,
  input  logic [SEL_W-1:0] wr_neuron,
  input  logic [SEL_W-1:0] wr_sel,
  input  data_t            wr_data,
  output logic             busy,
  output logic             done,
  output logic [CLS_W-1:0] class_idx,
  output logic [N_CLASSES-1:0] one_hot
);

  logic             layer_start [NUM_LAYERS];
  logic             layer_done  [NUM_LAYERS];
  logic             buf_load    [NUM_LAYERS];
  logic [SEL_W-1:0] in_idx      [NUM_LAYERS];   // input index each layer asks for
  data_t            x_in        [NUM_LAYERS];   // the input it gets back
  data_t            buf_rd      [NUM_LAYERS];   // read port of each layer's buffer
  logic             argmax_en, argmax_valid;

  nn_controller #(.NUM_LAYERS(NUM_LAYERS)) u_ctrl (
    .clk, .rst_n, .start,
    .layer_start, .layer_done, .buf_load,
    .argmax_en, .argmax_valid,
    .busy, .done, .cur_layer()
  );

  // Layer 0 reads the input vector.
  localparam int unsigned X_IDX_W = (N_INPUTS > 1) ? $clog2(N_INPUTS) : 1;
  assign x_in[0] = (int'(in_idx[0]) < N_INPUTS) ? x[X_IDX_W'(in_idx[0])] : data_t'(0);

  for (genvar l = 0; l < NUM_LAYERS; l++) begin : g_layer
    localparam int unsigned NI = (l == 0) ? N_INPUTS : HIDDEN[(l == 0) ? 0 : l-1];
    localparam int unsigned NO = (l == NUM_HIDDEN) ? N_CLASSES : HIDDEN[(l == NUM_HIDDEN) ? 0 : l];
    localparam bit          ACT_RELU = (l != NUM_HIDDEN);

    data_t y [NO];
    data_t q [NO];
    logic [SEL_W-1:0] rd_idx;

    nn_layer #(.N_IN(NI), .N_OUT(NO), .RELU(ACT_RELU), .SEL_W(SEL_W)) u_layer (
      .clk, .rst_n,
      .start    (layer_start[l]),
      .in_idx   (in_idx[l]),
      .x_in     (x_in[l]),
      .wr_en    (wr_en && (int'(wr_layer) == l)),
      .wr_neuron, .wr_sel, .wr_data,
      .busy     (),
      .done     (layer_done[l]),
      .y        (y)
    );

    if (l < NUM_HIDDEN) begin : g_next
      assign rd_idx      = in_idx[l+1];
      assign x_in[l+1]   = buf_rd[l];
    end else begin : g_last
      assign rd_idx = '0;
    end

    layer_buffer #(.N(NO), .SEL_W(SEL_W)) u_buf (
      .clk, .rst_n,
      .load   (buf_load[l]),
      .d      (y),
      .rd_idx (rd_idx),
      .rd_data(buf_rd[l]),
      .q      (q)
    );

    if (l == NUM_HIDDEN) begin : g_argmax
      argmax #(.N(NO)) u_argmax (
        .clk, .rst_n, .en(argmax_en), .v(q),
        .valid(argmax_valid), .idx(class_idx), .one_hot(one_hot)
      );
    end
  end

endmodule
