// tb_nn_controller: the controller drives four layer models whose done
// comes a random number of cycles after their start, and an argmax model.
// Checks that the layers are started strictly in order, one at a time, each
// the cycle after the previous layer's done; that each buffer is loaded
// exactly in its layer's done cycle; that argmax is enabled after the last
// layer; and that done/busy behave.
module tb_nn_controller;
  localparam int unsigned NL = 4;
  logic clk = 0, rst_n = 0, start = 0;
  logic layer_start [NL], layer_done [NL], buf_load [NL];
  logic argmax_en, argmax_valid = 0, busy, done;
  logic [2:0] cur_layer;
  int checks = 0, failures = 0;

  nn_controller #(.NUM_LAYERS(NL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // layer models
  int cnt [NL];
  int started [NL];
  int loads [NL];
  int expect_start = -1;   // layer whose start is expected this cycle
  int en_seen = 0;
  always @(posedge clk) if (rst_n) begin
    argmax_valid <= argmax_en;
    for (int l = 0; l < NL; l++) begin
      if (layer_start[l]) begin
        started[l]++;
        checks++;
        if (expect_start != l) begin failures++; $display("FAIL layer %0d started, expected %0d", l, expect_start); end
        cnt[l] <= $urandom_range(1, 6);
      end else if (cnt[l] > 0) cnt[l] <= cnt[l] - 1;
      if (buf_load[l]) begin
        loads[l]++;
        checks++;
        if (!layer_done[l]) begin failures++; $display("FAIL load %0d without done", l); end
      end
      if (layer_done[l] && !buf_load[l]) begin failures++; $display("FAIL done %0d not loaded", l); end
    end
    expect_start <= (start && !busy) ? 0 : -1;
    for (int l = 0; l < NL - 1; l++) if (layer_done[l]) expect_start <= l + 1;
    if (argmax_en) begin
      en_seen++;
      checks++;
      if (!$past(layer_done[NL-1])) begin failures++; $display("FAIL argmax_en timing"); end
    end
  end
  always_comb for (int l = 0; l < NL; l++) layer_done[l] = (cnt[l] == 1);

  initial begin
    for (int l = 0; l < NL; l++) begin cnt[l] = 0; started[l] = 0; loads[l] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      for (int l = 0; l < NL; l++) begin started[l] = 0; loads[l] = 0; end
      en_seen = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (en_seen != 1) begin failures++; $display("FAIL argmax_en count %0d", en_seen); end
      for (int l = 0; l < NL; l++) begin
        checks++;
        if (started[l] != 1 || loads[l] != 1) begin failures++; $display("FAIL layer %0d started %0d loaded %0d", l, started[l], loads[l]); end
      end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL busy after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
