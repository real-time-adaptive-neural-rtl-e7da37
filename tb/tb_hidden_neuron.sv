// tb_hidden_neuron: runs random multiply-accumulate sequences (random
// lengths, weights, inputs and biases, some large enough to saturate)
// through a ReLU neuron and a linear neuron side by side, and compares s
// and y with a model computed here: s = (b << 8) + sum x*w, y = saturate
// (s >>> 8), then max(0, y) for the ReLU neuron.
module tb_hidden_neuron;
  import rtann_pkg::*;

  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  data_t x = '0, w = '0, bias = '0;
  acc_t s_r, s_l;
  data_t y_r, y_l;
  int checks = 0, failures = 0;

  hidden_neuron #(.RELU(1'b1)) dut_relu (.clk, .rst_n, .clr, .en, .x, .w, .bias, .s(s_r), .y(y_r));
  hidden_neuron #(.RELU(1'b0)) dut_lin  (.clk, .rst_n, .clr, .en, .x, .w, .bias, .s(s_l), .y(y_l));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic longint sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  int n_pos = 0, n_neg = 0, n_sat = 0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      longint acc, ylin, yrel;
      int n, big;
      n = $urandom_range(1, 30);
      big = (t % 8 == 7);
      bias = data_t'($urandom_range(1024) - 512);
      acc = longint'(bias) * 256;
      @(negedge clk) begin clr = 1; en = 0; end
      @(negedge clk) clr = 0;
      for (int i = 0; i < n; i++) begin
        x = big ? data_t'($urandom) : data_t'($urandom_range(512) - 256);
        w = big ? data_t'($urandom) : data_t'($urandom_range(512) - 256);
        acc += longint'(x) * longint'(w);
        en = 1;
        @(negedge clk);
      end
      en = 0;
      ylin = sat16(acc >>> 8);
      yrel = (acc > 0) ? ylin : 0;
      if (acc > 0) n_pos++; else n_neg++;
      if (ylin == 32767 || ylin == -32768) n_sat++;
      checks += 3;
      if (longint'(s_r) != acc || longint'(s_l) != acc) begin failures++; $display("FAIL s %0d exp %0d", s_r, acc); end
      if (longint'(y_r) != yrel) begin failures++; $display("FAIL relu y %0d exp %0d", y_r, yrel); end
      if (longint'(y_l) != ylin) begin failures++; $display("FAIL linear y %0d exp %0d", y_l, ylin); end
    end
    checks++;
    if (n_pos == 0 || n_neg == 0 || n_sat == 0) begin failures++; $display("FAIL coverage %0d %0d %0d", n_pos, n_neg, n_sat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
