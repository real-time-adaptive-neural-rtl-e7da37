// tb_min_comparator: the comparator scans a buffer model held here (one
// cycle read latency, like the distances buffer). Random distance sets,
// some drawn from a tiny range to force ties, are checked for the label,
// distance and index of the first smallest entry, and for the scan time of
// DEPTH + 2 cycles from start to done.
module tb_min_comparator;
  import rtann_pkg::*;
  localparam int unsigned D = 70, DW = 39, IDX_W = $clog2(D);

  logic clk = 0, rst_n = 0, start = 0;
  logic rd_en;
  logic [IDX_W-1:0] rd_idx;
  logic [DW-1:0] rd_dist;
  logic [LABEL_W-1:0] rd_label;
  logic busy, done;
  logic [LABEL_W-1:0] label;
  logic [DW-1:0] min_dist;
  logic [IDX_W-1:0] min_idx;
  int checks = 0, failures = 0;
  logic [DW-1:0] mem_d [D];
  logic [LABEL_W-1:0] mem_l [D];

  min_comparator #(.DEPTH(D), .DIST_W(DW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rd_en) begin rd_dist <= mem_d[rd_idx]; rd_label <= mem_l[rd_idx]; end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      int best, cycles;
      for (int i = 0; i < D; i++) begin
        mem_d[i] = (t % 2 == 0) ? DW'($urandom_range(5)) : {$urandom, $urandom};
        mem_l[i] = LABEL_W'($urandom_range(4));
      end
      if (t == 3) mem_d[D-1] = '0;           // minimum in the last entry
      best = 0;
      for (int i = 1; i < D; i++) if (mem_d[i] < mem_d[best]) best = i;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks += 2;
      if (label !== mem_l[best] || min_dist !== mem_d[best] || int'(min_idx) != best) begin
        failures++;
        $display("FAIL set %0d: idx %0d dist %0d label %0d, expected %0d %0d %0d",
                 t, min_idx, min_dist, label, best, mem_d[best], mem_l[best]);
      end
      if (cycles != D + 2) begin failures++; $display("FAIL latency %0d", cycles); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
