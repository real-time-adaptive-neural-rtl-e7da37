// tb_competence_estimator: loads random centroids and model labels, applies
// random input vectors (and vectors equal to a stored centroid) and checks
// label, nearest index and squared distance against a search done here,
// plus the latency of ceil(C/2) + C + 7 cycles from start to done.
module tb_competence_estimator;
  import rtann_pkg::*;
  localparam int unsigned NC = 70, NF = 18, ND = 2;
  localparam int unsigned IDX_W = $clog2(NC), SEL_W = $clog2(NF + 1);
  localparam int unsigned DIST_W = 2*DATA_W + 2 + $clog2(NF);

  logic clk = 0, rst_n = 0, ld_en = 0, start = 0;
  logic [IDX_W-1:0] ld_idx = '0;
  logic [SEL_W-1:0] ld_sel = '0;
  data_t ld_data = '0;
  data_t x [NF];
  logic busy, done;
  logic [LABEL_W-1:0] label;
  logic [DIST_W-1:0] min_dist;
  logic [IDX_W-1:0] min_idx;
  int checks = 0, failures = 0;
  data_t cen [NC][NF];
  logic [LABEL_W-1:0] lab [NC];

  competence_estimator #(.NUM_CENTROIDS(NC), .N_FEATURES(NF), .NUM_DM(ND)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int j = 0; j < NF; j++) x[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NC; i++) begin
      lab[i] = LABEL_W'($urandom_range(4));
      for (int j = 0; j <= NF; j++) begin
        if (j < NF) cen[i][j] = data_t'($urandom_range(2000) - 1000);
        @(negedge clk);
        ld_en = 1; ld_idx = IDX_W'(i); ld_sel = SEL_W'(j);
        ld_data = (j < NF) ? cen[i][j] : data_t'(lab[i]);
      end
    end
    @(negedge clk) ld_en = 0;
    for (int t = 0; t < 60; t++) begin
      longint best_d, d;
      int best, cycles;
      for (int j = 0; j < NF; j++)
        x[j] = (t % 10 == 0) ? cen[(t * 7) % NC][j] : data_t'($urandom_range(2000) - 1000);
      best = 0; best_d = -1;
      for (int i = 0; i < NC; i++) begin
        d = 0;
        for (int j = 0; j < NF; j++) d += (longint'(x[j]) - cen[i][j]) ** 2;
        if (best_d < 0 || d < best_d) begin best_d = d; best = i; end
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks += 2;
      if (label !== lab[best] || int'(min_idx) != best || longint'(min_dist) != best_d) begin
        failures++;
        $display("FAIL vector %0d: idx %0d label %0d dist %0d, expected %0d %0d %0d",
                 t, min_idx, label, min_dist, best, lab[best], best_d);
      end
      if (cycles != (NC + ND - 1) / ND + NC + 7) begin
        failures++; $display("FAIL latency %0d", cycles);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
