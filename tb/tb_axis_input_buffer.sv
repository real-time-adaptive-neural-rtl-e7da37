// tb_axis_input_buffer: sends frames of random features with random gaps;
// checks the stored vector, vec_valid after a frame of the right length,
// len_err for short and long frames, and that TREADY is low and nothing is
// stored while hold is high.
module tb_axis_input_buffer;
  import rtann_pkg::*;
  localparam int unsigned NF = 18;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tvalid = 0, tready, tlast = 0, hold = 0, vec_valid, len_err;
  logic [31:0] tdata = '0;
  data_t x [NF];
  int checks = 0, failures = 0;

  axis_input_buffer #(.N_FEATURES(NF)) dut (
    .clk, .rst_n, .s_axis_tvalid(tvalid), .s_axis_tready(tready), .s_axis_tdata(tdata),
    .s_axis_tlast(tlast), .hold, .x, .vec_valid, .len_err);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  data_t sent [NF];

  task automatic send(input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      tvalid = 1; tdata = {16'hDEAD, 16'($urandom)}; tlast = (i == n - 1);
      if (i < NF) sent[i] = data_t'(tdata[15:0]);
      @(posedge clk);
      while (!tready) @(posedge clk);
      @(negedge clk) tvalid = 0;
      repeat ($urandom_range(2)) @(negedge clk);
    end
    tlast = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int n;
      n = (t % 5 == 3) ? NF - 2 : (t % 5 == 4) ? NF + 3 : NF;
      send(n);
      @(negedge clk);
      checks += 2;
      if (vec_valid !== (n == NF) || len_err !== (n != NF)) begin
        failures++; $display("FAIL frame %0d len %0d: valid %0d err %0d", t, n, vec_valid, len_err);
      end
      if (n == NF) for (int i = 0; i < NF; i++) begin
        checks++;
        if (x[i] !== sent[i]) begin failures++; $display("FAIL x[%0d]", i); end
      end
      // hold: no beat may be taken
      if (t % 3 == 0) begin
        data_t keep;
        keep = x[0];
        hold = 1;
        @(negedge clk) begin tvalid = 1; tdata = 32'h1111; tlast = 0; end
        repeat (3) @(negedge clk);
        checks += 2;
        if (tready !== 0) begin failures++; $display("FAIL tready during hold"); end
        if (x[0] !== keep) begin failures++; $display("FAIL write during hold"); end
        tvalid = 0; hold = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
