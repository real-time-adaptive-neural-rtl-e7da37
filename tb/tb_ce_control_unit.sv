// tb_ce_control_unit: the control unit drives models of the distance
// modules (two-cycle pipeline) and of the comparator (done after a random
// delay). Checks that every centroid index is issued exactly once and at
// most NUM_DM per cycle, that dm_valid/dm_idx follow the memory read by one
// cycle, that the comparator is started only after all distances are out,
// the cycle count from start to the comparator start (ceil(C/2) + 5), and
// that done follows the comparator's done. Run for 70 centroids and for an
// odd count.
module tb_ce_control_unit;
  int checks = 0, failures = 0;

  initial begin
    #2000000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic clk = 0;
  always #5 clk = ~clk;

  logic go [2];
  logic fin [2];

  int ch [2], fl [2];
  tb_ce_cu_case #(.NC(70), .ND(2)) c0 (.clk, .go(go[0]), .fin(fin[0]), .checks(ch[0]), .failures(fl[0]));
  tb_ce_cu_case #(.NC(9),  .ND(2)) c1 (.clk, .go(go[1]), .fin(fin[1]), .checks(ch[1]), .failures(fl[1]));

  initial begin
    go[0] = 0; go[1] = 0;
    #100 go[0] = 1;
    wait (fin[0]);
    go[1] = 1;
    wait (fin[1]);
    checks = ch[0] + ch[1]; failures = fl[0] + fl[1];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
