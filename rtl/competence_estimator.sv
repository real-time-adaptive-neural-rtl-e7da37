// competence_estimator: k-Nearest-Centroid competence estimator.
//
// The feature space was partitioned offline by k-means and each cluster
// linked to the ensemble model that classifies it best. For a new test
// instance this block finds the nearest centroid (smallest squared Euclidean
// distance) and outputs the label of the linked model, i.e. the model the
// reconfigurable partition should hold for this instance.
//
// Structure (after the estimator diagram): centroid memory, NUM_DM distance
// modules working in parallel, a control unit that runs the centroids through
// the modules in passes, a distances buffer and a comparator.
//
// Interface: x is the whole input vector, held stable from start to done.
// The centroid memory is written through ld_* before use (see centroid_rom).
// label, min_dist and min_idx are valid from the done pulse on.
// Timing: with C centroids and D modules, done comes ceil(C/D) + C + 7
// cycles after start (ceil(C/D) issue cycles, pipeline drain, C comparator
// reads); 112 cycles for the default 70 centroids and 2 modules.
module competence_estimator
  import rtann_pkg::*;
#(
  parameter int unsigned NUM_CENTROIDS = 70,
  parameter int unsigned N_FEATURES    = 18,
  parameter int unsigned NUM_DM        = 2,
  localparam int unsigned IDX_W  = $clog2(NUM_CENTROIDS),
  localparam int unsigned SEL_W  = $clog2(N_FEATURES + 1),
  localparam int unsigned DIST_W = 2*DATA_W + 2 + $clog2(N_FEATURES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ld_en,
  input  logic [IDX_W-1:0]   ld_idx,
  input  logic [SEL_W-1:0]   ld_sel,
  input  data_t              ld_data,
  input  logic               start,
  input  data_t              x [N_FEATURES],
  output logic               busy,
  output logic               done,
  output logic [LABEL_W-1:0] label,
  output logic [DIST_W-1:0]  min_dist,
  output logic [IDX_W-1:0]   min_idx
);

  localparam int unsigned TAG_W = LABEL_W + IDX_W;

  logic               rom_rd_en  [NUM_DM];
  logic [IDX_W-1:0]   rom_rd_idx [NUM_DM];
  data_t              rom_vec    [NUM_DM][N_FEATURES];
  logic [LABEL_W-1:0] rom_label  [NUM_DM];

  logic               dm_valid   [NUM_DM];
  logic [IDX_W-1:0]   dm_idx     [NUM_DM];
  logic               dm_ovalid  [NUM_DM];
  logic [DIST_W-1:0]  dm_dist    [NUM_DM];
  logic [TAG_W-1:0]   dm_otag    [NUM_DM];

  logic               buf_wr_en    [NUM_DM];
  logic [IDX_W-1:0]   buf_wr_idx   [NUM_DM];
  logic [LABEL_W-1:0] buf_wr_label [NUM_DM];

  logic               cmp_start, cmp_done, cmp_rd_en;
  logic [IDX_W-1:0]   cmp_rd_idx;
  logic [DIST_W-1:0]  cmp_rd_dist;
  logic [LABEL_W-1:0] cmp_rd_label;

  centroid_rom #(
    .NUM_CENTROIDS(NUM_CENTROIDS), .N_FEATURES(N_FEATURES), .NUM_RD(NUM_DM)
  ) u_rom (
    .clk, .wr_en(ld_en), .wr_idx(ld_idx), .wr_sel(ld_sel), .wr_data(ld_data),
    .rd_en(rom_rd_en), .rd_idx(rom_rd_idx), .rd_vec(rom_vec), .rd_label(rom_label)
  );

  ce_control_unit #(
    .NUM_CENTROIDS(NUM_CENTROIDS), .NUM_DM(NUM_DM)
  ) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .rom_rd_en, .rom_rd_idx, .dm_valid, .dm_idx,
    .dm_out_valid(dm_ovalid), .cmp_start, .cmp_done
  );

  for (genvar k = 0; k < NUM_DM; k++) begin : g_dm
    distance_module #(.N_FEATURES(N_FEATURES), .TAG_W(TAG_W)) u_dm (
      .clk, .rst_n,
      .in_valid (dm_valid[k]),
      .x        (x),
      .c        (rom_vec[k]),
      .in_tag   ({rom_label[k], dm_idx[k]}),
      .out_valid(dm_ovalid[k]),
      .distance (dm_dist[k]),
      .out_tag  (dm_otag[k])
    );
    assign buf_wr_en[k]    = dm_ovalid[k];
    assign buf_wr_idx[k]   = dm_otag[k][IDX_W-1:0];
    assign buf_wr_label[k] = dm_otag[k][TAG_W-1:IDX_W];
  end

  distances_buffer #(
    .DEPTH(NUM_CENTROIDS), .NUM_WR(NUM_DM), .DIST_W(DIST_W)
  ) u_buf (
    .clk,
    .wr_en(buf_wr_en), .wr_idx(buf_wr_idx), .wr_dist(dm_dist), .wr_label(buf_wr_label),
    .rd_en(cmp_rd_en), .rd_idx(cmp_rd_idx), .rd_dist(cmp_rd_dist), .rd_label(cmp_rd_label)
  );

  min_comparator #(.DEPTH(NUM_CENTROIDS), .DIST_W(DIST_W)) u_cmp (
    .clk, .rst_n, .start(cmp_start),
    .rd_en(cmp_rd_en), .rd_idx(cmp_rd_idx), .rd_dist(cmp_rd_dist), .rd_label(cmp_rd_label),
    .busy(), .done(cmp_done), .label, .min_dist, .min_idx
  );

endmodule
