// tb_rtann_node: one build of the adaptive network whose reconfigurable
// partition holds model RM_ID, with a processor-side model: an AXI4-Lite
// master for the registers, an AXI4-Stream master for the DMA, and the GPIO
// line to the decoupler. Used by tb_rtann_top, where five nodes stand for
// the five partial bitstreams of the same static design.
module tb_rtann_node
  import rtann_pkg::*;
#(
  parameter int unsigned RM_ID = 0
) (
  input logic clk,
  input logic rst_n
);
  logic tvalid, tready, tlast;
  logic [31:0] tdata;
  logic [7:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  logic decouple = 0, decouple_status, ce_done, nn_done;
  logic [LABEL_W-1:0] ce_label;
  logic [1:0] nn_class;

  axis_master_bfm dma (.clk, .tvalid, .tready, .tdata, .tlast);
  axil_master_bfm #(.ADDR_W(8)) ps (
    .clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bresp, .bvalid, .bready,
    .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);

  rtann_top #(.RM_ID(RM_ID)) dut (
    .clk, .rst_n,
    .s_axis_tvalid(tvalid), .s_axis_tready(tready), .s_axis_tdata(tdata), .s_axis_tlast(tlast),
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .dfx_decouple(decouple), .dfx_decouple_status(decouple_status),
    .ce_done, .ce_label, .nn_done, .nn_class);

  int ce_cycles, nn_cycles;

  task automatic load_centroids(input int cen [][], input int lab []);
    foreach (cen[i]) begin
      for (int j = 0; j < cen[i].size(); j++)
        ps.write(8'h1C, {8'(i), 8'(j), 16'(cen[i][j])});
      ps.write(8'h1C, {8'(i), 8'(cen[i].size()), 16'(lab[i])});
    end
  endtask

  task automatic load_weights(input int sizes [], input int w [][][]);
    for (int l = 0; l < sizes.size() - 1; l++)
      for (int j = 0; j < sizes[l+1]; j++)
        for (int i = 0; i <= sizes[l]; i++) begin
          ps.write(8'h20, {14'd0, 2'(l), 8'(j), 8'(i)});
          ps.write(8'h24, {16'd0, 16'(w[l][j][i])});
        end
  endtask

  task automatic send(input int x [], input int nbeats);
    dma.send(x, nbeats);
  endtask

  task automatic read_status(output logic [31:0] s);
    ps.read(8'h04, s);
  endtask

  // Start the estimator and wait for it; returns label, index and distance.
  task automatic estimate(output int label, output int idx, output longint dd);
    logic [31:0] s, lo, hi;
    ps.write(8'h00, 32'h1);
    ce_cycles = 0;
    do begin ps.read(8'h04, s); ce_cycles++; end while (!s[1] && ce_cycles < 1000);
    ps.read(8'h08, s);  label = int'(s);
    ps.read(8'h0C, s);  idx = int'(s);
    ps.read(8'h10, lo); ps.read(8'h14, hi);
    dd = longint'({hi, lo});
  endtask

  // Start the model; returns the class, or -1 if it never finished.
  task automatic classify(input int max_polls, output int cls, output logic [31:0] onehot);
    logic [31:0] s;
    ps.write(8'h00, 32'h2);
    nn_cycles = 0;
    do begin ps.read(8'h04, s); nn_cycles++; end while (!s[3] && nn_cycles < max_polls);
    if (!s[3]) begin cls = -1; onehot = '0; return; end
    ps.read(8'h18, s);
    cls = int'(s[7:0]); onehot = {24'd0, s[15:8]};
  endtask
endmodule
