// rtann_top: programmable-logic side of the real-time adaptive neural
// network (dynamic classifier selection with a k-nearest-centroid
// competence estimator).
//
// Per test instance the processor (1) streams the feature vector in through
// the DMA (s_axis_*), (2) starts the competence estimator and reads the label
// of the best model for this instance, (3) if that model is not the one in
// the reconfigurable partition, raises dfx_decouple, loads the model's
// partial bitstream and lowers dfx_decouple again, and (4) starts the model
// and reads the class. Steps (3) and the processor, DMA, interconnect and
// GPIO are outside this RTL, which holds:
//   axis_input_buffer     the instance, shared by estimator and model
//   competence_estimator  centroid memory, 2 distance modules, control
//                         unit, distances buffer, comparator
//   dfx_decoupler         isolation of the reconfigurable partition
//   dnn                   the model currently in the partition (RM_ID)
//   axi_lite_regs         control/status registers (map in that file)
//
// Parameters: DATASET picks the feature count, class count and number of
// centroids; RM_ID picks which of the five ensemble models (0 = NN1) this
// build places in the partition, i.e. which partial bitstream this
// configuration corresponds to. Defaults: vehicle data set, 18 features,
// 70 centroids, 2 distance modules, model NN1 (18,18,10), 4 classes.
// Widths of the register fields limit these to at most 256 centroids,
// 255 inputs per layer and 8 classes.
module rtann_top
  import rtann_pkg::*;
#(
  parameter dataset_e    DATASET = DS_VEHICLE,
  parameter int unsigned RM_ID   = 0,
  parameter int unsigned NUM_DM  = 2,
  localparam int unsigned N_FEATURES    = num_features(DATASET),
  localparam int unsigned NUM_CENTROIDS = num_centroids(DATASET),
  localparam int unsigned N_CLASSES     = num_classes(DATASET),
  localparam int unsigned NUM_HIDDEN    = num_hidden(DATASET, RM_ID),
  localparam int unsigned CLS_W         = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  localparam int unsigned C_IDX_W       = $clog2(NUM_CENTROIDS),
  localparam int unsigned C_SEL_W       = $clog2(N_FEATURES + 1),
  localparam int unsigned DIST_W        = 2*DATA_W + 2 + $clog2(N_FEATURES)
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Stream from the DMA (MM2S)
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tlast,
  // AXI4-Lite from the interconnect
  input  logic [7:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [7:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  // GPIO from the processor
  input  logic        dfx_decouple,
  output logic        dfx_decouple_status,
  // results also brought out as plain signals
  output logic        ce_done,
  output logic [LABEL_W-1:0] ce_label,
  output logic        nn_done,
  output logic [CLS_W-1:0] nn_class
);

  localparam int unsigned HIDDEN [MAX_HIDDEN] = '{
    hidden_size(DATASET, RM_ID, 0), hidden_size(DATASET, RM_ID, 1), hidden_size(DATASET, RM_ID, 2)};

  data_t x [N_FEATURES];
  logic  vec_valid, len_err;
  logic  ce_busy, ce_start, nn_start;
  logic [C_IDX_W-1:0] ce_min_idx;
  logic [DIST_W-1:0]  ce_min_dist;

  logic        cen_wr_en, wt_wr_en;
  logic [7:0]  cen_wr_idx, cen_wr_sel, wt_wr_neuron, wt_wr_sel;
  logic [15:0] cen_wr_data, wt_wr_data;
  logic [1:0]  wt_wr_layer;

  // static side / RP side of the decoupler
  logic                 s_nn_busy;
  logic [N_CLASSES-1:0] s_one_hot;
  logic                 rp_start, rp_wr_en, rp_busy, rp_done;
  logic [CLS_W-1:0]     rp_class;
  logic [N_CLASSES-1:0] rp_one_hot;

  axis_input_buffer #(.N_FEATURES(N_FEATURES)) u_in (
    .clk, .rst_n,
    .s_axis_tvalid, .s_axis_tready, .s_axis_tdata, .s_axis_tlast,
    .hold(ce_busy | s_nn_busy),
    .x, .vec_valid, .len_err
  );

  competence_estimator #(
    .NUM_CENTROIDS(NUM_CENTROIDS), .N_FEATURES(N_FEATURES), .NUM_DM(NUM_DM)
  ) u_ce (
    .clk, .rst_n,
    .ld_en  (cen_wr_en),
    .ld_idx (C_IDX_W'(cen_wr_idx)),
    .ld_sel (C_SEL_W'(cen_wr_sel)),
    .ld_data(data_t'(cen_wr_data)),
    .start  (ce_start),
    .x,
    .busy   (ce_busy),
    .done   (ce_done),
    .label  (ce_label),
    .min_dist(ce_min_dist),
    .min_idx(ce_min_idx)
  );

  dfx_decoupler #(.CLS_W(CLS_W), .N_CLASSES(N_CLASSES)) u_decoupler (
    .decouple(dfx_decouple), .decouple_status(dfx_decouple_status),
    .s_start(nn_start), .s_wr_en(wt_wr_en), .rp_start, .rp_wr_en,
    .rp_busy, .rp_done, .rp_class_idx(rp_class), .rp_one_hot,
    .s_busy(s_nn_busy), .s_done(nn_done), .s_class_idx(nn_class), .s_one_hot
  );

  // Reconfigurable partition: the model selected by RM_ID.
  dnn #(
    .N_INPUTS(N_FEATURES), .NUM_HIDDEN(NUM_HIDDEN), .HIDDEN(HIDDEN), .N_CLASSES(N_CLASSES)
  ) u_rp_dnn (
    .clk, .rst_n,
    .start    (rp_start),
    .x,
    .wr_en    (rp_wr_en),
    .wr_layer (wt_wr_layer),
    .wr_neuron(wt_wr_neuron),
    .wr_sel   (wt_wr_sel),
    .wr_data  (data_t'(wt_wr_data)),
    .busy     (rp_busy),
    .done     (rp_done),
    .class_idx(rp_class),
    .one_hot  (rp_one_hot)
  );

  axi_lite_regs #(.ADDR_W(8)) u_regs (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .ce_start, .nn_start,
    .cen_wr_en, .cen_wr_idx, .cen_wr_sel, .cen_wr_data,
    .wt_wr_en, .wt_wr_layer, .wt_wr_neuron, .wt_wr_sel, .wt_wr_data,
    .ce_busy,
    .ce_done,
    .ce_label   (8'(ce_label)),
    .ce_min_idx (8'(ce_min_idx)),
    .ce_min_dist(64'(ce_min_dist)),
    .nn_busy    (s_nn_busy),
    .nn_done,
    .nn_class   (8'(nn_class)),
    .nn_one_hot (8'(s_one_hot)),
    .vec_valid, .len_err,
    .decouple_status(dfx_decouple_status)
  );

endmodule
