// tb_rtann_datasets: the design built for the two other data sets of the
// evaluation, with the ensemble sizes of those data sets: Pima diabetes
// (8 features, 2 classes, 50 centroids) with model NN3 (12,12,8) and NN1
// (5,3), and German credit (24 features, 2 classes, 70 centroids) with
// model NN2 (7,7,4) and NN3 (4,4). Each build runs four instances end to
// end through tb_rtann_ds_case; the builds run one after the other.
module tb_rtann_datasets;
  import rtann_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int N = 4;
  logic go [N], fin [N];
  int ch [N], fl [N];

  tb_rtann_ds_case #(.DATASET(DS_DIABETES), .RM_ID(2)) c0 (.clk, .go(go[0]), .fin(fin[0]), .checks(ch[0]), .failures(fl[0]));
  tb_rtann_ds_case #(.DATASET(DS_DIABETES), .RM_ID(0)) c1 (.clk, .go(go[1]), .fin(fin[1]), .checks(ch[1]), .failures(fl[1]));
  tb_rtann_ds_case #(.DATASET(DS_GERMAN),   .RM_ID(1)) c2 (.clk, .go(go[2]), .fin(fin[2]), .checks(ch[2]), .failures(fl[2]));
  tb_rtann_ds_case #(.DATASET(DS_GERMAN),   .RM_ID(2)) c3 (.clk, .go(go[3]), .fin(fin[3]), .checks(ch[3]), .failures(fl[3]));

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int k = 0; k < N; k++) go[k] = 0;
    for (int k = 0; k < N; k++) begin
      #20 go[k] = 1;
      wait (fin[k]);
    end
    for (int k = 0; k < N; k++) begin checks += ch[k]; failures += fl[k]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
