// tb_rtann_full: one complete operation of the design at its default size
// (vehicle configuration: 18 features, 70 centroids, two distance modules,
// model NN1 (18,18,10) with 4 classes in the reconfigurable partition).
// Loads all centroids and all weights through the register interface,
// streams a test instance that lies near a centroid linked to NN1, runs the
// estimator and the model, and checks the selected label, the nearest
// centroid, its distance and the class against reference models. It also
// checks the estimator latency seen on the ce_done output (112 cycles) and
// that the decoupler blocks a start.
module tb_rtann_full;
  import rtann_pkg::*;
  import tb_ref_pkg::*;

  localparam int NF = 18, NC = 70, NCLS = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

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

  rtann_top dut (
    .clk, .rst_n,
    .s_axis_tvalid(tvalid), .s_axis_tready(tready), .s_axis_tdata(tdata), .s_axis_tlast(tlast),
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .dfx_decouple(decouple), .dfx_decouple_status(decouple_status),
    .ce_done, .ce_label, .nn_done, .nn_class);

  initial begin
    repeat (500000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d expected %0d", what, got, exp); end
  endtask

  // cycle counter from the estimator start pulse to ce_done
  int ce_lat = -1, cyc = 0, ce_t0 = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.ce_start) ce_t0 <= cyc;
    if (ce_done) ce_lat <= cyc - ce_t0;
  end

  initial begin
    int cen [][], lab [], sizes [], w [][][], x [];
    int exp_idx, exp_cls, k;
    longint exp_d;
    logic [31:0] s, lo, hi;
    cen = new[NC]; lab = new[NC];
    for (int i = 0; i < NC; i++) begin
      cen[i] = new[NF];
      for (int j = 0; j < NF; j++) cen[i][j] = $urandom_range(2000) - 1000;
      lab[i] = i % 5;
    end
    sizes = new[5];
    sizes[0] = NF; sizes[4] = NCLS;
    for (int l = 0; l < 3; l++) sizes[l+1] = hidden_size(DS_VEHICLE, 0, l);
    w = new[4];
    for (int l = 0; l < 4; l++) begin
      w[l] = new[sizes[l+1]];
      for (int j = 0; j < sizes[l+1]; j++) begin
        w[l][j] = new[sizes[l] + 1];
        for (int i = 0; i <= sizes[l]; i++) w[l][j][i] = $urandom_range(200) - 100;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NC; i++) begin
      for (int j = 0; j < NF; j++) ps.write(8'h1C, {8'(i), 8'(j), 16'(cen[i][j])});
      ps.write(8'h1C, {8'(i), 8'(NF), 16'(lab[i])});
    end
    for (int l = 0; l < 4; l++)
      for (int j = 0; j < sizes[l+1]; j++)
        for (int i = 0; i <= sizes[l]; i++) begin
          ps.write(8'h20, {14'd0, 2'(l), 8'(j), 8'(i)});
          ps.write(8'h24, {16'd0, 16'(w[l][j][i])});
        end
    k = 35;                                   // label 0: NN1
    x = new[NF];
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
    check("estimator latency", ce_lat, 112);

    // decoupled: the model must not start
    decouple = 1;
    ps.write(8'h00, 32'h2);
    repeat (100) @(negedge clk);
    ps.read(8'h04, s);
    check("decoupled start ignored", s[3:2], 0);
    check("decouple status", s[6], 1);
    decouple = 0;

    ps.write(8'h00, 32'h2);
    do ps.read(8'h04, s); while (!s[3]);
    ps.read(8'h18, s);
    check("class", s[7:0], exp_cls);
    check("one-hot", s[15:8], 1 << exp_cls);
    check("bus errors", ps.errors, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
