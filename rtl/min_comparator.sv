// min_comparator: finds the smallest distance in the distances buffer and
// outputs the model label stored with it.
//
// After start it reads buffer entries 0 .. DEPTH-1, one per cycle, and keeps
// the running minimum with a strict "<" comparison (the symbol printed on
// the comparator in the estimator diagram), so on a tie the lowest centroid
// index wins. The sequential scan is this design's choice; the source only
// says the comparator queries the buffer for the least distance.
//
// Interface: start (pulse); rd_en/rd_idx to the buffer and rd_dist/rd_label
// back one cycle later; done (pulse) with label, min_dist and min_idx valid
// from then until the next start.
// Timing: done is high DEPTH+2 cycles after the start cycle.
module min_comparator
  import rtann_pkg::*;
#(
  parameter int unsigned DEPTH  = 70,
  parameter int unsigned DIST_W = 39,
  localparam int unsigned IDX_W = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               rd_en,
  output logic [IDX_W-1:0]   rd_idx,
  input  logic [DIST_W-1:0]  rd_dist,
  input  logic [LABEL_W-1:0] rd_label,
  output logic               busy,
  output logic               done,
  output logic [LABEL_W-1:0] label,
  output logic [DIST_W-1:0]  min_dist,
  output logic [IDX_W-1:0]   min_idx
);

  logic             scanning;    // issuing reads
  logic             chk;         // a read result arrives this cycle
  logic [IDX_W-1:0] chk_idx;
  logic             first;

  assign rd_en = scanning;
  assign busy  = scanning | chk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scanning <= 1'b0;
      chk      <= 1'b0;
      chk_idx  <= '0;
      rd_idx   <= '0;
      first    <= 1'b0;
      done     <= 1'b0;
      label    <= '0;
      min_dist <= '0;
      min_idx  <= '0;
    end else begin
      done <= 1'b0;
      chk  <= scanning;
      chk_idx <= rd_idx;
      if (start && !busy) begin
        scanning <= 1'b1;
        rd_idx   <= '0;
        first    <= 1'b1;
      end else if (scanning) begin
        if (int'(rd_idx) == DEPTH-1) scanning <= 1'b0;
        else                         rd_idx <= rd_idx + 1'b1;
      end
      if (chk) begin
        if (first || rd_dist < min_dist) begin
          min_dist <= rd_dist;
          label    <= rd_label;
          min_idx  <= chk_idx;
        end
        first <= 1'b0;
        if (int'(chk_idx) == DEPTH-1) done <= 1'b1;
      end
    end
  end

endmodule
