// distance_module: squared Euclidean distance between the input vector and
// one centroid.
//
// As drawn in the estimator diagram, one subtractor and one squarer per
// feature work in parallel; their results are held in a buffer register and
// a summation stage adds them into the squared distance. The square root of
// the Euclidean distance is not taken: it does not change which centroid is
// nearest. The prose of the source mentions "a multiplier" per module while
// the diagram shows one squarer per feature; this module follows the diagram.
// Summing the buffer with an adder tree in one cycle is this design's choice.
//
// Interface: in_valid with x, c and an opaque tag; out_valid with distance and
// the same tag. Timing: fully pipelined, one vector pair per cycle, latency
// two cycles (squares buffer, then sum).
module distance_module
  import rtann_pkg::*;
#(
  parameter int unsigned N_FEATURES = 18,
  parameter int unsigned TAG_W      = 10,
  localparam int unsigned SQ_W   = 2*DATA_W + 2,
  localparam int unsigned DIST_W = SQ_W + $clog2(N_FEATURES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  data_t             x   [N_FEATURES],
  input  data_t             c   [N_FEATURES],
  input  logic [TAG_W-1:0]  in_tag,
  output logic              out_valid,
  output logic [DIST_W-1:0] distance,
  output logic [TAG_W-1:0]  out_tag
);

  typedef logic signed [DATA_W:0] diff_t;   // one bit wider than the inputs
  typedef logic [SQ_W-1:0]        sq_t;

  sq_t              sq_buf [N_FEATURES];    // the "Buffer" of the diagram
  logic             v1;
  logic [TAG_W-1:0] tag1;

  // Stage 1: parallel subtract and square.
  always_ff @(posedge clk) begin
    for (int i = 0; i < N_FEATURES; i++) begin
      diff_t d;
      d = diff_t'(x[i]) - diff_t'(c[i]);
      sq_buf[i] <= sq_t'(d * d);
    end
    tag1 <= in_tag;
  end

  // Stage 2: summation of the buffered squares.
  logic [DIST_W-1:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < N_FEATURES; i++) sum += DIST_W'(sq_buf[i]);
  end

  always_ff @(posedge clk) begin
    distance <= sum;
    out_tag <= tag1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

endmodule
