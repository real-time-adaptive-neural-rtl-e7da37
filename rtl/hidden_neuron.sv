// hidden_neuron: one neuron, a multiply-accumulate unit followed by ReLU.
//
// Follows the neuron diagram: a multiplier forms x_i * w_i, an accumulator
// (the sigma block) sums the products together with the bias b, and the ReLU
// is a comparator (s > 0) steering a 2:1 multiplexer between s and the
// constant 0. One input is consumed per cycle, so a neuron with n inputs
// needs n cycles. With RELU = 0 the multiplexer is left out and the neuron
// is linear, which is how the output-layer neurons are built here (the
// source applies argmax, not ReLU, after the output layer).
//
// Fixed point (this design's choice): x, w, b and y are Q(DATA_W-FRAC_W).FRAC_W
// words; products are exact and the bias is pre-shifted by FRAC_W, so the
// accumulator holds s with 2*FRAC_W fractional bits. y is s shifted back by
// FRAC_W (arithmetic, i.e. rounding toward minus infinity) and saturated.
//
// Interface: clr loads the accumulator with the bias; en adds x*w. y is a
// combinational function of the accumulator, valid the cycle after the last en.
module hidden_neuron
  import rtann_pkg::*;
#(
  parameter bit RELU = 1'b1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  en,
  input  data_t x,
  input  data_t w,
  input  data_t bias,
  output acc_t  s,
  output data_t y
);

  acc_t  prod;
  data_t s_q;       // s rescaled to a data word

  assign prod = acc_t'(x) * acc_t'(w);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   s <= '0;
    else if (clr) s <= acc_t'(bias) <<< FRAC_W;
    else if (en)  s <= s + prod;
  end

  assign s_q = sat_data(s >>> FRAC_W);

  if (RELU) begin : g_relu
    logic pos;      // comparator output: s > 0
    assign pos = (s > 0);
    assign y   = pos ? s_q : data_t'(0);
  end else begin : g_linear
    assign y = s_q;
  end

endmodule
