// axis_input_buffer: receives a test instance from the DMA.
//
// AXI4-Stream sink. Each beat carries one feature in the low DATA_W bits of
// a 32-bit word (one feature per beat and the word width are this design's
// choices); beats are stored in order into x[0..N_FEATURES-1]. A frame ends
// with TLAST: if it held exactly N_FEATURES beats, vec_valid is set;
// otherwise len_err is set and vec_valid stays low. Extra beats beyond
// N_FEATURES are dropped. While hold is high (estimator or model working
// on x) TREADY is low so the vector cannot change under them.
//
// Interface: s_axis_* (TDATA 32 bits, TLAST), hold, x, vec_valid, len_err.
// Timing: one beat per cycle when not held; vec_valid rises the cycle after
// the TLAST beat and falls with the first beat of the next frame.
module axis_input_buffer
  import rtann_pkg::*;
#(
  parameter int unsigned N_FEATURES = 18,
  localparam int unsigned CNT_W = $clog2(N_FEATURES + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tlast,
  input  logic        hold,
  output data_t       x [N_FEATURES],
  output logic        vec_valid,
  output logic        len_err
);

  logic [CNT_W-1:0] cnt;   // beats received in the current frame
  logic             beat;

  assign s_axis_tready = ~hold;
  assign beat          = s_axis_tvalid & s_axis_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      vec_valid <= 1'b0;
      len_err   <= 1'b0;
      for (int i = 0; i < N_FEATURES; i++) x[i] <= '0;
    end else if (beat) begin
      if (int'(cnt) < N_FEATURES) x[cnt] <= data_t'(s_axis_tdata[DATA_W-1:0]);
      if (s_axis_tlast) begin
        cnt       <= '0;
        vec_valid <= (int'(cnt) == N_FEATURES-1);
        len_err   <= (int'(cnt) != N_FEATURES-1);
      end else begin
        vec_valid <= 1'b0;
        if (int'(cnt) < N_FEATURES) cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
