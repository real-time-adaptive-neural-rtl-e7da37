// tb_axi_lite_regs: drives the register file through an AXI4-Lite master
// model. Checks the start pulses, the centroid and weight write pulses with
// their fields, every status and result register, the sticky done bits,
// the latched model result, and the handshake order (BVALID/RVALID only
// after the address handshake). A random phase then writes random centroid
// and weight words and reads random status and result values back, and
// the last part checks the SLVERR response (and no side effect) for
// unmapped addresses, a read of a write-only register and a write to a
// read-only one. The length of a transaction is checked too: with this
// bus model a write or a read takes four clock cycles (VALID, ready pulse,
// response, response accepted).
module tb_axi_lite_regs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;

  logic ce_start, nn_start, cen_wr_en, wt_wr_en;
  logic [7:0] cen_wr_idx, cen_wr_sel, wt_wr_neuron, wt_wr_sel;
  logic [15:0] cen_wr_data, wt_wr_data;
  logic [1:0] wt_wr_layer;
  logic ce_busy = 0, ce_done = 0, nn_busy = 0, nn_done = 0, vec_valid = 0, len_err = 0, decouple_status = 0;
  logic [7:0] ce_label = '0, ce_min_idx = '0, nn_class = '0, nn_one_hot = '0;
  logic [63:0] ce_min_dist = '0;

  axil_master_bfm #(.ADDR_W(8)) m (
    .clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bresp, .bvalid, .bready,
    .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);

  axi_lite_regs #(.ADDR_W(8)) dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  // pulse capture
  int n_ce = 0, n_nn = 0, n_cen = 0, n_wt = 0;
  logic [7:0] c_idx, c_sel, w_n, w_s; logic [15:0] c_dat, w_dat; logic [1:0] w_l;
  bit aw_done = 0, ar_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (ce_start) n_ce++;
    if (nn_start) n_nn++;
    if (cen_wr_en) begin n_cen++; c_idx = cen_wr_idx; c_sel = cen_wr_sel; c_dat = cen_wr_data; end
    if (wt_wr_en) begin n_wt++; w_l = wt_wr_layer; w_n = wt_wr_neuron; w_s = wt_wr_sel; w_dat = wt_wr_data; end
    // ordering: a response only after its address handshake
    if (awvalid && awready) aw_done = 1;
    if (bvalid && !aw_done) begin failures++; $display("FAIL BVALID before AW handshake"); end
    if (bvalid && bready) aw_done = 0;
    if (arvalid && arready) ar_done = 1;
    if (rvalid && !ar_done) begin failures++; $display("FAIL RVALID before AR handshake"); end
    if (rvalid && rready) ar_done = 0;
  end

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1;
    m.write(8'h00, 32'h1);
    check("ce_start pulses", n_ce, 1);
    check("nn_start pulses", n_nn, 0);
    m.write(8'h00, 32'h2);
    check("nn_start pulses", n_nn, 1);
    m.write(8'h1C, {8'd69, 8'd18, 16'hBEEF});
    check("centroid writes", n_cen, 1);
    check("centroid fields", {c_idx, c_sel, c_dat}, {8'd69, 8'd18, 16'hBEEF});
    m.write(8'h20, 32'h0003_0A05);
    m.read(8'h20, d);
    check("weight addr readback", d, 32'h0003_0A05);
    m.write(8'h24, 32'h0000_1234);
    check("weight writes", n_wt, 1);
    check("weight address fields", {14'd0, w_l, w_n, w_s}, {14'd0, 2'd3, 8'h0A, 8'h05});
    check("weight data", {16'd0, w_dat}, 32'h1234);
    // status and results
    ce_busy = 1; nn_busy = 1; vec_valid = 1; len_err = 1; decouple_status = 1;
    m.read(8'h04, d);
    check("status busy bits", d, 32'h0000_0075);
    ce_busy = 0; nn_busy = 0; vec_valid = 0; len_err = 0; decouple_status = 0;
    @(negedge clk) ce_done = 1;
    @(negedge clk) ce_done = 0;
    ce_label = 8'd3; ce_min_idx = 8'd42; ce_min_dist = 64'h0000_0012_3456_789A;
    m.read(8'h04, d);  check("ce done sticky", d, 32'h2);
    m.read(8'h08, d);  check("ce label", d, 32'd3);
    m.read(8'h0C, d);  check("ce min idx", d, 32'd42);
    m.read(8'h10, d);  check("ce dist lo", d, 32'h3456_789A);
    m.read(8'h14, d);  check("ce dist hi", d, 32'h12);
    nn_class = 8'd2; nn_one_hot = 8'b0100;
    @(negedge clk) nn_done = 1;
    @(negedge clk) nn_done = 0;
    nn_class = 8'd0; nn_one_hot = 8'd0;      // result must stay latched
    m.read(8'h18, d);  check("nn result latched", d, 32'h0000_0402);
    m.read(8'h04, d);  check("both done sticky", d, 32'hA);
    m.write(8'h00, 32'h1);
    m.read(8'h04, d);  check("ce done cleared by start", d, 32'h8);
    check("bus errors", m.errors, 0);

    // random phase
    for (int r = 0; r < 60; r++) begin
      logic [31:0] v, exp_res;
      int c0, c1, ncen, nwt;
      v = $urandom;
      ncen = n_cen; nwt = n_wt;
      c0 = cyc;
      m.write(8'h1C, v);
      c1 = cyc;
      check("write cycles", c1 - c0, 4);
      check("random centroid write", n_cen, ncen + 1);
      check("random centroid fields", {c_idx, c_sel, c_dat}, v);
      v = $urandom & 32'h0003_FFFF;
      m.write(8'h20, v);
      m.read(8'h20, d);
      check("random weight addr", d, v);
      m.write(8'h24, {16'hFFFF, v[15:0]});
      check("random weight write", n_wt, nwt + 1);
      check("random weight fields", {14'd0, w_l, w_n, w_s}, v);
      check("random weight data", w_dat, v[15:0]);
      ce_label = 8'($urandom); ce_min_idx = 8'($urandom); ce_min_dist = {$urandom, $urandom};
      c0 = cyc;
      m.read(8'h08, d);  check("random ce label", d, {24'd0, ce_label});
      c1 = cyc;
      check("read cycles", c1 - c0, 4);
      m.read(8'h0C, d);  check("random ce min idx", d, {24'd0, ce_min_idx});
      m.read(8'h10, d);  check("random ce dist lo", d, ce_min_dist[31:0]);
      m.read(8'h14, d);  check("random ce dist hi", d, ce_min_dist[63:32]);
      m.write(8'h00, 32'h2);
      nn_class = 8'($urandom_range(3)); nn_one_hot = 8'(1 << nn_class);
      @(negedge clk) nn_done = 1;
      @(negedge clk) nn_done = 0;
      exp_res = {16'd0, nn_one_hot, nn_class};
      nn_class = 8'($urandom); nn_one_hot = 8'($urandom);   // must not show
      m.read(8'h18, d);  check("random nn result", d, exp_res);
    end
    check("bus errors", m.errors, 0);

    // error responses
    begin
      int ncen, nwt, nce, nnn;
      ncen = n_cen; nwt = n_wt; nce = n_ce; nnn = n_nn;
      m.read(8'h3C, d);  check("unmapped read data", d, 32'h0);
      check("unmapped read SLVERR", m.last_resp, 2'b10);
      m.read(8'h1C, d);  check("write-only read SLVERR", m.last_resp, 2'b10);
      m.write(8'h40, 32'hFFFF_FFFF); check("unmapped write SLVERR", m.last_resp, 2'b10);
      m.write(8'h18, 32'hFFFF_FFFF); check("read-only write SLVERR", m.last_resp, 2'b10);
      check("no side effects", (n_cen - ncen) + (n_wt - nwt) + (n_ce - nce) + (n_nn - nnn), 0);
      m.read(8'h04, d);  check("OKAY after errors", m.last_resp, 2'b00);
      check("error count", m.errors, 4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
