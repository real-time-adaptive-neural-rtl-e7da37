// tb_layer_buffer: loads random words, reads them back through the serial
// port and the parallel outputs, checks that they hold while load is low
// and that an out-of-range index reads zero.
module tb_layer_buffer;
  import rtann_pkg::*;
  localparam int unsigned N = 18;

  logic clk = 0, rst_n = 0, load = 0;
  data_t d [N], q [N], rd_data;
  logic [7:0] rd_idx = '0;
  int checks = 0, failures = 0;
  data_t ref_v [N];

  layer_buffer #(.N(N), .SEL_W(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) d[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin ref_v[i] = data_t'($urandom); d[i] = ref_v[i]; end
      load = 1;
      @(negedge clk) load = 0;
      for (int i = 0; i < N; i++) d[i] = data_t'($urandom);   // must not be taken
      @(negedge clk);
      for (int i = 0; i <= N; i++) begin
        rd_idx = 8'(i);
        #1;
        checks++;
        if (rd_data !== ((i < N) ? ref_v[i] : data_t'(0))) begin failures++; $display("FAIL rd %0d: %h exp %h t=%0d", i, rd_data, ref_v[i], t); end
        if (i < N) begin
          checks++;
          if (q[i] !== ref_v[i]) begin failures++; $display("FAIL q %0d", i); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
