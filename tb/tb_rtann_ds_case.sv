// tb_rtann_ds_case: the whole design built for one data set and one model
// of that data set's ensemble (parameters DATASET and RM_ID of the top),
// driven through its processor-side buses (used by tb_rtann_datasets).
// It loads random centroids and random weights for the model in the
// partition, then streams NOPS instances, each near a random centroid, runs
// the estimator and the model, and checks the nearest centroid, its label
// and distance, the class and one-hot label against the reference models of
// tb_ref_pkg. It also checks, cycle by cycle, the estimator latency
// ceil(C/2) + C + 7 and the model latency sum over layers of (inputs + 2)
// plus 3, both measured on the top's internal start pulses and its done
// outputs.
module tb_rtann_ds_case
  import rtann_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter dataset_e    DATASET = DS_DIABETES,
  parameter int unsigned RM_ID   = 2,
  parameter int          NOPS    = 4
) (
  input  logic clk,
  input  logic go,
  output logic fin,
  output int   checks,
  output int   failures
);
  localparam int NF   = int'(num_features(DATASET));
  localparam int NC   = int'(num_centroids(DATASET));
  localparam int NCLS = int'(num_classes(DATASET));
  localparam int NH   = int'(num_hidden(DATASET, RM_ID));
  localparam int CLSW = (NCLS > 1) ? $clog2(NCLS) : 1;

  logic rst_n = 0;
  logic tvalid, tready, tlast;
  logic [31:0] tdata;
  logic [7:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  logic decouple = 0, decouple_status, ce_done, nn_done;
  logic [LABEL_W-1:0] ce_label;
  logic [CLSW-1:0] nn_class;

  axis_master_bfm dma (.clk, .tvalid, .tready, .tdata, .tlast);
  axil_master_bfm #(.ADDR_W(8)) ps (
    .clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bresp, .bvalid, .bready,
    .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);

  rtann_top #(.DATASET(DATASET), .RM_ID(RM_ID)) dut (
    .clk, .rst_n,
    .s_axis_tvalid(tvalid), .s_axis_tready(tready), .s_axis_tdata(tdata), .s_axis_tlast(tlast),
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .dfx_decouple(decouple), .dfx_decouple_status(decouple_status),
    .ce_done, .ce_label, .nn_done, .nn_class);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s (data set %0d, model %0d): %0d expected %0d", what, DATASET, RM_ID, got, exp);
    end
  endtask

  // latency counters: start pulse to done output
  int cyc = 0, ce_t0 = 0, nn_t0 = 0, ce_lat = -1, nn_lat = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.ce_start) ce_t0 <= cyc;
    if (ce_done) ce_lat <= cyc - ce_t0;
    if (dut.rp_start) nn_t0 <= cyc;
    if (nn_done) nn_lat <= cyc - nn_t0;
  end

  initial begin
    int cen [][], lab [], sizes [], w [][][], x [];
    int exp_idx, exp_cls, k, exp_ce, exp_nn;
    longint exp_d;
    logic [31:0] s, lo, hi;
    fin = 0; checks = 0; failures = 0;
    exp_ce = (NC + 1) / 2 + NC + 7;
    cen = new[NC]; lab = new[NC];
    for (int i = 0; i < NC; i++) begin
      cen[i] = new[NF];
      for (int j = 0; j < NF; j++) cen[i][j] = $urandom_range(2000) - 1000;
      lab[i] = $urandom_range(NUM_MODELS - 1);
    end
    sizes = new[NH + 2];
    sizes[0] = NF; sizes[NH + 1] = NCLS;
    for (int l = 0; l < NH; l++) sizes[l+1] = hidden_size(DATASET, RM_ID, l);
    exp_nn = 3;
    for (int l = 0; l <= NH; l++) exp_nn += sizes[l] + 2;
    w = new[NH + 1];
    for (int l = 0; l <= NH; l++) begin
      w[l] = new[sizes[l+1]];
      for (int j = 0; j < sizes[l+1]; j++) begin
        w[l][j] = new[sizes[l] + 1];
        for (int i = 0; i <= sizes[l]; i++) w[l][j][i] = $urandom_range(200) - 100;
      end
    end
    wait (go);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NC; i++) begin
      for (int j = 0; j < NF; j++) ps.write(8'h1C, {8'(i), 8'(j), 16'(cen[i][j])});
      ps.write(8'h1C, {8'(i), 8'(NF), 16'(lab[i])});
    end
    for (int l = 0; l <= NH; l++)
      for (int j = 0; j < sizes[l+1]; j++)
        for (int i = 0; i <= sizes[l]; i++) begin
          ps.write(8'h20, {14'd0, 2'(l), 8'(j), 8'(i)});
          ps.write(8'h24, {16'd0, 16'(w[l][j][i])});
        end
    x = new[NF];
    for (int op = 0; op < NOPS; op++) begin
      k = $urandom_range(NC - 1);
      for (int j = 0; j < NF; j++) x[j] = cen[k][j] + $urandom_range(40) - 20;
      exp_idx = nearest(x, cen, exp_d);
      exp_cls = forward(x, sizes, w);
      dma.send(x, NF);
      ps.read(8'h04, s);
      check("vector valid", s[4], 1);
      ps.write(8'h00, 32'h1);
      do ps.read(8'h04, s); while (!s[1]);
      ps.read(8'h08, s);  check("selected model", s, lab[exp_idx]);
      ps.read(8'h0C, s);  check("nearest centroid", s, exp_idx);
      ps.read(8'h10, lo); ps.read(8'h14, hi);
      check("squared distance", longint'({hi, lo}), exp_d);
      check("estimator latency", ce_lat, exp_ce);
      ps.write(8'h00, 32'h2);
      do ps.read(8'h04, s); while (!s[3]);
      ps.read(8'h18, s);
      check("class", s[7:0], exp_cls);
      check("one-hot", s[15:8], 1 << exp_cls);
      check("model latency", nn_lat, exp_nn);
    end
    check("bus errors", ps.errors, 0);
    fin = 1;
  end
endmodule
