// distances_buffer: temporary store of the distance to every centroid.
//
// The control unit writes, for each centroid, its squared distance and the
// label of the model linked to it; the comparator then reads the entries
// back one by one. There is one write port per distance module so both
// modules can store in the same cycle, and one read port.
//
// Interface: wr_en[p]/wr_idx[p]/wr_dist[p]/wr_label[p]; rd_en/rd_idx.
// Timing: registered read, rd_dist/rd_label one cycle after rd_en.
// Storing the label next to the distance is this design's choice.
module distances_buffer
  import rtann_pkg::*;
#(
  parameter int unsigned DEPTH  = 70,
  parameter int unsigned NUM_WR = 2,
  parameter int unsigned DIST_W = 39,
  localparam int unsigned IDX_W = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               wr_en    [NUM_WR],
  input  logic [IDX_W-1:0]   wr_idx   [NUM_WR],
  input  logic [DIST_W-1:0]  wr_dist  [NUM_WR],
  input  logic [LABEL_W-1:0] wr_label [NUM_WR],
  input  logic               rd_en,
  input  logic [IDX_W-1:0]   rd_idx,
  output logic [DIST_W-1:0]  rd_dist,
  output logic [LABEL_W-1:0] rd_label
);

  logic [DIST_W-1:0]  dist_mem  [DEPTH];
  logic [LABEL_W-1:0] label_mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NUM_WR; p++) begin
      if (wr_en[p] && int'(wr_idx[p]) < DEPTH) begin
        dist_mem[wr_idx[p]]  <= wr_dist[p];
        label_mem[wr_idx[p]] <= wr_label[p];
      end
    end
    if (rd_en && int'(rd_idx) < DEPTH) begin
      rd_dist  <= dist_mem[rd_idx];
      rd_label <= label_mem[rd_idx];
    end
  end

endmodule
