// tb_dnn_case: one model configuration of the dnn test (used by tb_dnn).
// Loads random weights and biases through the write port, runs NRUN random
// input vectors and compares class index and one-hot label with a
// forward pass computed here in 64-bit integers (Q8.8 words, products
// shifted back by 8, saturation to 16 bits, ReLU on hidden layers, linear
// output layer, first maximum wins). Also checks the cycle count from start
// to done against sum over layers of (inputs + 2), plus 3. With NEG_OUT set
// the output-layer biases are drawn from [-3000, -1000] (class 0 gets
// -6000), so every class score is negative, class 0 is never the answer,
// and the decision relies on the output layer being linear (a ReLU there
// would clip all scores to zero and report class 0).
module tb_dnn_case
  import rtann_pkg::*;
#(
  parameter int unsigned NI   = 18,
  parameter int unsigned NH   = 3,
  parameter int unsigned H [MAX_HIDDEN] = '{18, 18, 10},
  parameter int unsigned NC   = 4,
  parameter int          NRUN = 40,
  parameter bit          NEG_OUT = 1'b0   // output-layer biases all strongly negative
) (
  input  logic clk,
  input  logic go,
  output logic fin,
  output int   checks,
  output int   failures
);
  localparam int unsigned NL = NH + 1;
  localparam int unsigned CW = (NC > 1) ? $clog2(NC) : 1;

  logic rst_n = 0, start = 0, wr_en = 0, busy, done;
  data_t x [NI];
  logic [1:0] wr_layer = '0;
  logic [7:0] wr_neuron = '0, wr_sel = '0;
  data_t wr_data = '0;
  logic [CW-1:0] class_idx;
  logic [NC-1:0] one_hot;

  dnn #(.N_INPUTS(NI), .NUM_HIDDEN(NH), .HIDDEN(H), .N_CLASSES(NC)) dut (.*);

  int lin [NL], lout [NL];
  data_t W [NL][32][33];

  function automatic longint sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  initial begin
    longint act [33], nxt [33];
    int exp_cyc;
    fin = 0; checks = 0; failures = 0;
    for (int i = 0; i < NI; i++) x[i] = '0;
    exp_cyc = 3;
    for (int l = 0; l < NL; l++) begin
      lin[l]  = (l == 0) ? NI : H[l-1];
      lout[l] = (l == NH) ? NC : H[l];
      exp_cyc += lin[l] + 2;
    end
    wait (go);
    @(negedge clk) rst_n = 1;
    for (int l = 0; l < NL; l++)
      for (int j = 0; j < lout[l]; j++)
        for (int i = 0; i <= lin[l]; i++) begin
          W[l][j][i] = data_t'($urandom_range(200) - 100);
          if (NEG_OUT && l == NH && i == lin[l])
            W[l][j][i] = (j == 0) ? data_t'(-6000) : data_t'(-1000 - int'($urandom_range(2000)));
          @(negedge clk);
          wr_en = 1; wr_layer = 2'(l); wr_neuron = 8'(j); wr_sel = 8'(i); wr_data = W[l][j][i];
        end
    @(negedge clk) wr_en = 0;
    for (int r = 0; r < NRUN; r++) begin
      int best, cyc;
      for (int i = 0; i < NI; i++) begin
        x[i] = data_t'($urandom_range(1024) - 512);
        act[i] = x[i];
      end
      for (int l = 0; l < NL; l++) begin
        for (int j = 0; j < lout[l]; j++) begin
          longint acc;
          acc = longint'(W[l][j][lin[l]]) * 256;
          for (int i = 0; i < lin[l]; i++) acc += act[i] * W[l][j][i];
          nxt[j] = sat16(acc >>> 8);
          if (l < NH && acc <= 0) nxt[j] = 0;
        end
        for (int j = 0; j < lout[l]; j++) act[j] = nxt[j];
      end
      best = 0;
      for (int j = 1; j < NC; j++) if (act[j] > act[best]) best = j;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done && cyc < 2000) begin @(negedge clk); cyc++; end
      checks += 2;
      if (int'(class_idx) != best || one_hot !== NC'(1 << best)) begin
        failures++; $display("FAIL run %0d: class %0d one-hot %b, expected %0d", r, class_idx, one_hot, best);
      end
      if (cyc != exp_cyc) begin failures++; $display("FAIL latency %0d expected %0d", cyc, exp_cyc); end
    end
    fin = 1;
  end
endmodule
