// tb_centroid_rom: writes every coordinate and label of the centroid memory
// with a known pattern, then reads random centroids through both read ports
// and checks the whole vector and the label one cycle later. Also checks
// that a read without rd_en keeps the previous output.
module tb_centroid_rom;
  import rtann_pkg::*;
  localparam int unsigned NC = 70, NF = 18, NR = 2;
  localparam int unsigned IDX_W = $clog2(NC), SEL_W = $clog2(NF + 1);

  logic clk = 0, wr_en = 0;
  logic [IDX_W-1:0] wr_idx = '0;
  logic [SEL_W-1:0] wr_sel = '0;
  data_t wr_data = '0;
  logic rd_en [NR];
  logic [IDX_W-1:0] rd_idx [NR];
  data_t rd_vec [NR][NF];
  logic [LABEL_W-1:0] rd_label [NR];
  int checks = 0, failures = 0;

  centroid_rom #(.NUM_CENTROIDS(NC), .N_FEATURES(NF), .NUM_RD(NR)) dut (.*);

  always #5 clk = ~clk;

  function automatic data_t pat(int i, int j);
    return data_t'(i * 293 - j * 517 + 11);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < NR; p++) begin rd_en[p] = 0; rd_idx[p] = '0; end
    for (int i = 0; i < NC; i++)
      for (int j = 0; j <= NF; j++) begin
        @(negedge clk);
        wr_en = 1; wr_idx = IDX_W'(i); wr_sel = SEL_W'(j);
        wr_data = (j == NF) ? data_t'((i * 7) % 5) : pat(i, j);
      end
    @(negedge clk) wr_en = 0;
    for (int t = 0; t < 200; t++) begin
      int idx [NR];
      for (int p = 0; p < NR; p++) begin
        idx[p] = $urandom_range(NC - 1);
        rd_en[p] = 1; rd_idx[p] = IDX_W'(idx[p]);
      end
      @(negedge clk);
      for (int p = 0; p < NR; p++) begin
        rd_en[p] = 0;
        for (int j = 0; j < NF; j++) begin
          checks++;
          if (rd_vec[p][j] !== pat(idx[p], j)) begin
            failures++;
            $display("FAIL port %0d centroid %0d coord %0d: %0d != %0d", p, idx[p], j, rd_vec[p][j], pat(idx[p], j));
          end
        end
        checks++;
        if (rd_label[p] !== LABEL_W'((idx[p] * 7) % 5)) begin
          failures++; $display("FAIL label port %0d centroid %0d", p, idx[p]);
        end
      end
      // held output without rd_en
      rd_idx[0] = IDX_W'((idx[0] + 1) % NC);
      @(negedge clk);
      checks++;
      if (rd_vec[0][0] !== pat(idx[0], 0)) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
