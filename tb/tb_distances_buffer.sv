// tb_distances_buffer: stores distances and labels through both write ports
// at once, then reads every entry back and checks it one cycle after the
// read enable.
module tb_distances_buffer;
  import rtann_pkg::*;
  localparam int unsigned D = 70, NW = 2, DW = 39, IDX_W = $clog2(D);

  logic clk = 0;
  logic wr_en [NW];
  logic [IDX_W-1:0] wr_idx [NW];
  logic [DW-1:0] wr_dist [NW];
  logic [LABEL_W-1:0] wr_label [NW];
  logic rd_en = 0;
  logic [IDX_W-1:0] rd_idx = '0;
  logic [DW-1:0] rd_dist;
  logic [LABEL_W-1:0] rd_label;
  int checks = 0, failures = 0;
  logic [DW-1:0] ref_d [D];
  logic [LABEL_W-1:0] ref_l [D];

  distances_buffer #(.DEPTH(D), .NUM_WR(NW), .DIST_W(DW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < NW; p++) begin wr_en[p] = 0; wr_idx[p] = '0; wr_dist[p] = '0; wr_label[p] = '0; end
    for (int r = 0; r < 2; r++) begin
      for (int i = 0; i < D; i += NW) begin
        @(negedge clk);
        for (int p = 0; p < NW; p++) begin
          ref_d[i+p] = {$urandom, $urandom};
          ref_l[i+p] = LABEL_W'($urandom_range(4));
          wr_en[p] = 1; wr_idx[p] = IDX_W'(i + p); wr_dist[p] = ref_d[i+p]; wr_label[p] = ref_l[i+p];
        end
      end
      @(negedge clk);
      for (int p = 0; p < NW; p++) wr_en[p] = 0;
      for (int i = D - 1; i >= 0; i--) begin
        rd_en = 1; rd_idx = IDX_W'(i);
        @(negedge clk);
        checks++;
        if (rd_dist !== ref_d[i] || rd_label !== ref_l[i]) begin
          failures++; $display("FAIL entry %0d", i);
        end
      end
      rd_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
