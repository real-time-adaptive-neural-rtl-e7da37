// centroid_rom: the centroid store of the competence estimator.
//
// Holds NUM_CENTROIDS centroids of N_FEATURES coordinates each, plus for
// every centroid the label of the ensemble model linked to its cluster. The
// k-means centroids and the cluster-to-model labels are produced offline by
// training; the published design keeps them in a read-only memory. Since RTL
// cannot carry trained contents, this memory has a word-wide write port that
// the processor uses once after configuration (an assumption of this design);
// during classification it is only read.
//
// Interface:
//   wr_en/wr_idx/wr_sel/wr_data  write coordinate wr_sel of centroid wr_idx;
//                                wr_sel == N_FEATURES writes the label.
//   rd_en[p]/rd_idx[p]           NUM_RD read ports, each returning a whole
//   rd_vec[p]/rd_label[p]        centroid vector and its label.
// Timing: reads are registered, data appear one cycle after rd_en.
module centroid_rom
  import rtann_pkg::*;
#(
  parameter int unsigned NUM_CENTROIDS = 70,
  parameter int unsigned N_FEATURES    = 18,
  parameter int unsigned NUM_RD        = 2,
  localparam int unsigned IDX_W = $clog2(NUM_CENTROIDS),
  localparam int unsigned SEL_W = $clog2(N_FEATURES + 1)
) (
  input  logic               clk,
  input  logic               wr_en,
  input  logic [IDX_W-1:0]   wr_idx,
  input  logic [SEL_W-1:0]   wr_sel,
  input  data_t              wr_data,
  input  logic               rd_en    [NUM_RD],
  input  logic [IDX_W-1:0]   rd_idx   [NUM_RD],
  output data_t              rd_vec   [NUM_RD][N_FEATURES],
  output logic [LABEL_W-1:0] rd_label [NUM_RD]
);

  data_t              coord [NUM_CENTROIDS][N_FEATURES];
  logic [LABEL_W-1:0] label [NUM_CENTROIDS];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_idx) < NUM_CENTROIDS) begin
      if (int'(wr_sel) < N_FEATURES) coord[wr_idx][wr_sel] <= wr_data;
      else                           label[wr_idx] <= wr_data[LABEL_W-1:0];
    end
  end

  for (genvar p = 0; p < NUM_RD; p++) begin : g_rd
    always_ff @(posedge clk) begin
      if (rd_en[p] && int'(rd_idx[p]) < NUM_CENTROIDS) begin
        rd_vec[p]   <= coord[rd_idx[p]];
        rd_label[p] <= label[rd_idx[p]];
      end
    end
  end

endmodule
