// tb_nn_layer: an 18-input, 10-neuron ReLU layer and a 10-input, 4-neuron
// linear layer get random weights and biases; the testbench serves the
// inputs the layer asks for through in_idx and compares y with a reference
// computed here. Checks that done comes N_IN + 1 cycles after start and
// that in_idx walks 0..N_IN-1 in order.
module tb_nn_layer;
  import rtann_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // DUT A: hidden layer
  localparam int unsigned AI = 18, AO = 10;
  logic a_start = 0, a_wr = 0, a_busy, a_done;
  logic [7:0] a_idx, a_wn = '0, a_ws = '0;
  data_t a_wd = '0, a_x, a_y [AO];
  data_t a_in [AI];
  assign a_x = (int'(a_idx) < AI) ? a_in[a_idx] : data_t'(0);
  nn_layer #(.N_IN(AI), .N_OUT(AO), .RELU(1'b1)) dut_a (
    .clk, .rst_n, .start(a_start), .in_idx(a_idx), .x_in(a_x),
    .wr_en(a_wr), .wr_neuron(a_wn), .wr_sel(a_ws), .wr_data(a_wd),
    .busy(a_busy), .done(a_done), .y(a_y));

  // DUT B: output layer
  localparam int unsigned BI = 10, BO = 4;
  logic b_start = 0, b_wr = 0, b_busy, b_done;
  logic [7:0] b_idx, b_wn = '0, b_ws = '0;
  data_t b_wd = '0, b_x, b_y [BO];
  data_t b_in [BI];
  assign b_x = (int'(b_idx) < BI) ? b_in[b_idx] : data_t'(0);
  nn_layer #(.N_IN(BI), .N_OUT(BO), .RELU(1'b0)) dut_b (
    .clk, .rst_n, .start(b_start), .in_idx(b_idx), .x_in(b_x),
    .wr_en(b_wr), .wr_neuron(b_wn), .wr_sel(b_ws), .wr_data(b_wd),
    .busy(b_busy), .done(b_done), .y(b_y));

  data_t wa [AO][AI+1];
  data_t wb [BO][BI+1];

  function automatic longint ref_neuron(longint acc, bit relu);
    longint y;
    y = acc >>> 8;
    if (y > 32767) y = 32767;
    if (y < -32768) y = -32768;
    if (relu && acc <= 0) y = 0;
    return y;
  endfunction

  // in_idx must count up by one while busy
  int exp_a = 0;
  always @(posedge clk) if (rst_n) begin
    if (a_busy) begin
      if (int'(a_idx) != exp_a) begin failures++; $display("FAIL in_idx %0d exp %0d", a_idx, exp_a); end
      exp_a <= exp_a + 1;
    end else exp_a <= 0;
  end

  initial begin
    for (int i = 0; i < AI; i++) a_in[i] = '0;
    for (int i = 0; i < BI; i++) b_in[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < AO; j++) for (int i = 0; i <= AI; i++) begin
      wa[j][i] = data_t'($urandom_range(256) - 128);
      @(negedge clk) begin a_wr = 1; a_wn = 8'(j); a_ws = 8'(i); a_wd = wa[j][i]; end
    end
    for (int j = 0; j < BO; j++) for (int i = 0; i <= BI; i++) begin
      wb[j][i] = data_t'($urandom_range(256) - 128);
      @(negedge clk) begin a_wr = 0; b_wr = 1; b_wn = 8'(j); b_ws = 8'(i); b_wd = wb[j][i]; end
    end
    @(negedge clk) begin a_wr = 0; b_wr = 0; end
    for (int t = 0; t < 30; t++) begin
      int cyc;
      for (int i = 0; i < AI; i++) a_in[i] = data_t'($urandom_range(1024) - 512);
      for (int i = 0; i < BI; i++) b_in[i] = data_t'($urandom_range(1024) - 512);
      @(negedge clk) begin a_start = 1; b_start = 1; end
      @(negedge clk) begin a_start = 0; b_start = 0; end
      cyc = 1;
      while (!a_done) begin
        @(negedge clk); cyc++;
        if (cyc == BI + 1) begin
          checks++;
          if (!b_done) begin failures++; $display("FAIL B latency"); end
          for (int j = 0; j < BO; j++) begin
            longint acc;
            acc = longint'(wb[j][BI]) * 256;
            for (int i = 0; i < BI; i++) acc += longint'(b_in[i]) * wb[j][i];
            checks++;
            if (longint'(b_y[j]) != ref_neuron(acc, 0)) begin failures++; $display("FAIL B y[%0d]=%0d exp %0d", j, b_y[j], ref_neuron(acc, 0)); end
          end
        end
        if (cyc > 100) break;
      end
      checks++;
      if (cyc != AI + 1) begin failures++; $display("FAIL A latency %0d", cyc); end
      for (int j = 0; j < AO; j++) begin
        longint acc;
        acc = longint'(wa[j][AI]) * 256;
        for (int i = 0; i < AI; i++) acc += longint'(a_in[i]) * wa[j][i];
        checks++;
        if (longint'(a_y[j]) != ref_neuron(acc, 1)) begin failures++; $display("FAIL A y[%0d]=%0d exp %0d", j, a_y[j], ref_neuron(acc, 1)); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
