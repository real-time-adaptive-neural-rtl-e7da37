// tb_ce_cu_case: one configuration of the control-unit test (used by
// tb_ce_control_unit). Runs five estimations when go rises, then raises fin.
// Checks that every centroid is issued exactly once, that dm_valid/dm_idx
// follow the memory read by one cycle, that the comparator starts only
// once all distances are stored and exactly ceil(NC/ND) + 5 cycles after
// start, and that done follows the comparator's done.
module tb_ce_cu_case #(
  parameter int unsigned NC = 70,
  parameter int unsigned ND = 2
) (
  input  logic clk,
  input  logic go,
  output logic fin,
  output int   checks,
  output int   failures
);
  localparam int unsigned IDX_W = $clog2(NC);
  logic rst_n = 0, start = 0, busy, done;
  logic rom_rd_en [ND];
  logic [IDX_W-1:0] rom_rd_idx [ND];
  logic dm_valid [ND];
  logic [IDX_W-1:0] dm_idx [ND];
  logic dm_out_valid [ND];
  logic cmp_start, cmp_done = 0;

  ce_control_unit #(.NUM_CENTROIDS(NC), .NUM_DM(ND)) dut (.*);

  // cycles from the start pulse to the sampling edge after cmp_start: one
  // to leave IDLE, one pass per cycle, memory read (1), distance module (2),
  // store count (1); with the comparator's C + 2 this gives the estimator's
  // ceil(C/2) + C + 7
  localparam int EXP_CMP = (NC + ND - 1) / ND + 5;

  int seen [NC];
  int outs = 0;
  logic v1 [ND], v2 [ND];
  logic [IDX_W-1:0] last_idx [ND];
  logic last_en [ND];
  bit cmp_started = 0;

  initial begin fin = 0; checks = 0; failures = 0; end

  always @(posedge clk) begin
    for (int k = 0; k < ND; k++) begin
      // distance-module model: out_valid two cycles after dm_valid
      v1[k] <= rst_n & dm_valid[k];
      v2[k] <= v1[k];
      last_en[k]  <= rom_rd_en[k];
      last_idx[k] <= rom_rd_idx[k];
      if (rst_n && rom_rd_en[k]) seen[rom_rd_idx[k]]++;
      if (rst_n && v2[k]) outs++;
      if (rst_n && (dm_valid[k] !== last_en[k] || (dm_valid[k] && dm_idx[k] !== last_idx[k]))) begin
        failures++; $display("FAIL dm_valid/idx not aligned with memory read");
      end
    end
    if (rst_n && cmp_start) begin
      checks++;
      if (outs != NC) begin failures++; $display("FAIL comparator started after %0d of %0d distances", outs, NC); end
      cmp_started = 1;
    end
  end
  always_comb for (int k = 0; k < ND; k++) dm_out_valid[k] = v2[k];

  initial begin
    for (int k = 0; k < ND; k++) begin v1[k] = 0; v2[k] = 0; last_en[k] = 0; last_idx[k] = '0; end
    wait (go);
    @(negedge clk) rst_n = 1;
    for (int r = 0; r < 5; r++) begin
      int wait_c;
      for (int i = 0; i < NC; i++) seen[i] = 0;
      outs = 0; cmp_started = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      checks++;
      if (!busy) begin failures++; $display("FAIL not busy after start"); end
      wait_c = 1;
      while (!cmp_started && wait_c < 4 * NC) begin @(negedge clk); wait_c++; end
      checks++;
      if (wait_c != EXP_CMP) begin
        failures++; $display("FAIL comparator start after %0d cycles, expected %0d", wait_c, EXP_CMP);
      end
      wait_c = $urandom_range(1, 20);
      repeat (wait_c) @(negedge clk);
      checks++;
      if (done) begin failures++; $display("FAIL done before comparator"); end
      cmp_done = 1;
      @(negedge clk) cmp_done = 0;
      checks++;
      if (!done || busy) begin failures++; $display("FAIL done/busy after comparator done"); end
      for (int i = 0; i < NC; i++) begin
        checks++;
        if (seen[i] != 1) begin failures++; $display("FAIL centroid %0d issued %0d times", i, seen[i]); end
      end
    end
    fin = 1;
  end
endmodule
