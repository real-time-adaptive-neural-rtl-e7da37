// argmax: picks the output neuron with the largest value.
//
// Replaces a softmax after the output layer: it compares the N output values
// and returns the index of the largest as a class number and as a one-hot
// vector. On a tie the lowest index wins (strict ">" against the running
// best). The comparison is combinational; the result is registered when en
// is high and valid is pulsed in the next cycle.
module argmax
  import rtann_pkg::*;
#(
  parameter int unsigned N = 4,
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  data_t            v [N],
  output logic             valid,
  output logic [IDX_W-1:0] idx,
  output logic [N-1:0]     one_hot
);

  logic [IDX_W-1:0] best_idx;
  data_t            best_val;

  always_comb begin
    best_idx = '0;
    best_val = v[0];
    for (int i = 1; i < N; i++) begin
      if (v[i] > best_val) begin
        best_val = v[i];
        best_idx = IDX_W'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid   <= 1'b0;
      idx     <= '0;
      one_hot <= '0;
    end else begin
      valid <= en;
      if (en) begin
        idx     <= best_idx;
        one_hot <= N'(1) << best_idx;
      end
    end
  end

endmodule
