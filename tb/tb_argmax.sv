// tb_argmax: random output-layer values (with ties and negative values) are
// checked for the index of the first largest value, its one-hot code and
// the one-cycle valid after en.
module tb_argmax;
  import rtann_pkg::*;
  localparam int unsigned N = 4;

  logic clk = 0, rst_n = 0, en = 0;
  data_t v [N];
  logic valid;
  logic [1:0] idx;
  logic [N-1:0] one_hot;
  int checks = 0, failures = 0;

  argmax #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) v[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      int best;
      for (int i = 0; i < N; i++)
        v[i] = (t % 3 == 0) ? data_t'($urandom_range(2) - 1) : data_t'($urandom);
      best = 0;
      for (int i = 1; i < N; i++) if (v[i] > v[best]) best = i;
      en = 1;
      @(negedge clk) en = 0;
      checks += 2;
      if (!valid) begin failures++; $display("FAIL valid"); end
      if (int'(idx) != best || one_hot !== (N'(1) << best)) begin
        failures++; $display("FAIL %0d %0d %0d %0d -> %0d (%b), expected %0d", v[0], v[1], v[2], v[3], idx, one_hot, best);
      end
      @(negedge clk);
      checks++;
      if (valid) begin failures++; $display("FAIL valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
