// tb_dnn: end-to-end test of single models. Runs model NN1 of the vehicle
// configuration (18 inputs, hidden layers 18,18,10, 4 classes), model NN2
// of the vehicle configuration (30,30,20) and model NN1 of the diabetes
// configuration (8 inputs, hidden layers 5,3, 2 classes) against a
// forward pass computed in the testbench. A fourth run repeats vehicle NN1
// with negative output-layer biases, so that every class score is negative
// and a clipped (ReLU) output layer would be noticed.
module tb_dnn;
  import rtann_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    #5000000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic go [4], fin [4];
  int ch [4], fl [4];
  tb_dnn_case #(.NI(18), .NH(3), .H('{18, 18, 10}), .NC(4)) c0 (.clk, .go(go[0]), .fin(fin[0]), .checks(ch[0]), .failures(fl[0]));
  tb_dnn_case #(.NI(18), .NH(3), .H('{30, 30, 20}), .NC(4)) c1 (.clk, .go(go[1]), .fin(fin[1]), .checks(ch[1]), .failures(fl[1]));
  tb_dnn_case #(.NI(8),  .NH(2), .H('{5, 3, 0}),    .NC(2)) c2 (.clk, .go(go[2]), .fin(fin[2]), .checks(ch[2]), .failures(fl[2]));
  tb_dnn_case #(.NI(18), .NH(3), .H('{18, 18, 10}), .NC(4), .NEG_OUT(1'b1)) c3 (.clk, .go(go[3]), .fin(fin[3]), .checks(ch[3]), .failures(fl[3]));

  initial begin
    for (int k = 0; k < 4; k++) go[k] = 0;
    for (int k = 0; k < 4; k++) begin
      #20 go[k] = 1;
      wait (fin[k]);
    end
    for (int k = 0; k < 4; k++) begin checks += ch[k]; failures += fl[k]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
