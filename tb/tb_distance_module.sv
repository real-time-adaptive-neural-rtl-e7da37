// tb_distance_module: feeds random vector pairs (including extreme values)
// back to back, one per cycle, and checks that each squared distance,
// computed here with 64-bit integers, comes out exactly two cycles later
// with its tag.
module tb_distance_module;
  import rtann_pkg::*;
  localparam int unsigned NF = 18, TAG_W = 10;
  localparam int unsigned DIST_W = 2*DATA_W + 2 + $clog2(NF);
  localparam int NV = 300;

  logic clk = 0, rst_n = 0, in_valid = 0;
  data_t x [NF], c [NF];
  logic [TAG_W-1:0] in_tag = '0;
  logic out_valid;
  logic [DIST_W-1:0] distance;
  logic [TAG_W-1:0] out_tag;
  int checks = 0, failures = 0;
  longint expd [NV];
  int cyc = 0, in_cyc [NV];

  distance_module #(.N_FEATURES(NF), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int nout = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    int t;
    t = int'(out_tag);
    checks++;
    if (longint'(distance) != expd[t] || cyc - in_cyc[t] != 2) begin
      failures++;
      $display("FAIL tag %0d dist %0d exp %0d latency %0d", t, distance, expd[t], cyc - in_cyc[t]);
    end
    nout++;
  end

  initial begin
    for (int i = 0; i < NF; i++) begin x[i] = '0; c[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      longint s;
      @(negedge clk);
      s = 0;
      for (int i = 0; i < NF; i++) begin
        if (v < 3) begin
          x[i] = (v == 0) ? data_t'(16'h7fff) : (v == 1) ? data_t'(16'h8000) : data_t'(i);
          c[i] = (v == 0) ? data_t'(16'h8000) : (v == 1) ? data_t'(16'h7fff) : data_t'(i);
        end else begin
          x[i] = data_t'($urandom);
          c[i] = data_t'($urandom);
        end
        s += (longint'(x[i]) - longint'(c[i])) * (longint'(x[i]) - longint'(c[i]));
      end
      expd[v] = s; in_cyc[v] = cyc;
      in_valid = 1; in_tag = TAG_W'(v);
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (nout != NV) begin failures++; $display("FAIL got %0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
