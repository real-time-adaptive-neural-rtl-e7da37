// axi_lite_regs: AXI4-Lite register file between the processor and the
// programmable logic.
//
// Through it the processor starts the competence estimator and the model in
// the reconfigurable partition, reads their results, and writes the
// centroids and the model weights. The source states only that results are
// read over AXI4-Lite; the register map below is this design's choice.
//
//   0x00 CTRL        W  bit0: start estimator, bit1: start model (pulses)
//   0x04 STATUS      R  bit0 est. busy, bit1 est. done, bit2 model busy,
//                       bit3 model done, bit4 vector valid, bit5 length
//                       error, bit6 decouple status (done bits are sticky,
//                       cleared by the matching start)
//   0x08 CE_LABEL    R  label of the selected model
//   0x0C CE_MIN_IDX  R  index of the nearest centroid
//   0x10 CE_DIST_LO  R  squared distance to it, bits 31:0
//   0x14 CE_DIST_HI  R  bits 63:32
//   0x18 NN_RESULT   R  [7:0] class index, [15:8] one-hot label
//   0x1C CENTROID_WR W  [31:24] centroid, [23:16] coordinate (N = label),
//                       [15:0] value; each write stores one word
//   0x20 WEIGHT_ADDR RW [17:16] layer, [15:8] neuron, [7:0] input (N = bias)
//   0x24 WEIGHT_DATA W  [15:0] value, written at WEIGHT_ADDR
//
// Protocol: one transaction of each kind at a time. When AWVALID and WVALID
// are both high the register is written and AWREADY and WREADY rise
// together for one cycle; BVALID rises in the cycle after that handshake.
// A read raises ARREADY for one cycle and RVALID in the cycle after it.
// The response is OKAY for the registers above and SLVERR for any other
// address, and for a read of a write-only or a write to a read-only
// register; such an access reads 0 and writes nothing. WSTRB is ignored
// (full-word writes).
module axi_lite_regs #(
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  // control
  output logic              ce_start,
  output logic              nn_start,
  output logic              cen_wr_en,
  output logic [7:0]        cen_wr_idx,
  output logic [7:0]        cen_wr_sel,
  output logic [15:0]       cen_wr_data,
  output logic              wt_wr_en,
  output logic [1:0]        wt_wr_layer,
  output logic [7:0]        wt_wr_neuron,
  output logic [7:0]        wt_wr_sel,
  output logic [15:0]       wt_wr_data,
  // status
  input  logic              ce_busy,
  input  logic              ce_done,
  input  logic [7:0]        ce_label,
  input  logic [7:0]        ce_min_idx,
  input  logic [63:0]       ce_min_dist,
  input  logic              nn_busy,
  input  logic              nn_done,
  input  logic [7:0]        nn_class,
  input  logic [7:0]        nn_one_hot,
  input  logic              vec_valid,
  input  logic              len_err,
  input  logic              decouple_status
);

  localparam logic [7:0] A_CTRL = 8'h00, A_STATUS = 8'h04, A_CE_LABEL = 8'h08,
                         A_CE_MIN_IDX = 8'h0C, A_CE_DIST_LO = 8'h10,
                         A_CE_DIST_HI = 8'h14, A_NN_RESULT = 8'h18,
                         A_CENTROID_WR = 8'h1C, A_WEIGHT_ADDR = 8'h20,
                         A_WEIGHT_DATA = 8'h24;

  logic        ce_done_q, nn_done_q;
  logic [15:0] nn_result_q;
  logic [17:0] weight_addr;
  logic        wr_fire, rd_fire;
  logic [7:0]  waddr, raddr;
  logic        w_ok, r_ok;

  localparam logic [1:0] RESP_OKAY = 2'b00, RESP_SLVERR = 2'b10;

  // Which addresses accept a write and which a read.
  assign w_ok = (waddr inside {A_CTRL, A_CENTROID_WR, A_WEIGHT_ADDR, A_WEIGHT_DATA});
  assign r_ok = (raddr inside {A_STATUS, A_CE_LABEL, A_CE_MIN_IDX, A_CE_DIST_LO,
                               A_CE_DIST_HI, A_NN_RESULT, A_WEIGHT_ADDR});

  assign wr_fire       = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid && !s_axi_awready;
  assign rd_fire       = s_axi_arvalid && !s_axi_rvalid && !s_axi_arready;
  assign waddr         = 8'(s_axi_awaddr);
  assign raddr         = 8'(s_axi_araddr);
  assign wt_wr_layer   = weight_addr[17:16];
  assign wt_wr_neuron  = weight_addr[15:8];
  assign wt_wr_sel     = weight_addr[7:0];

  // Write channel and the pulses it produces.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_awready <= 1'b0;
      s_axi_wready  <= 1'b0;
      s_axi_bvalid  <= 1'b0;
      s_axi_bresp   <= RESP_OKAY;
      ce_start      <= 1'b0;
      nn_start      <= 1'b0;
      cen_wr_en     <= 1'b0;
      cen_wr_idx    <= '0;
      cen_wr_sel    <= '0;
      cen_wr_data   <= '0;
      wt_wr_en      <= 1'b0;
      wt_wr_data    <= '0;
      weight_addr   <= '0;
    end else begin
      s_axi_awready <= 1'b0;
      s_axi_wready  <= 1'b0;
      ce_start      <= 1'b0;
      nn_start      <= 1'b0;
      cen_wr_en     <= 1'b0;
      wt_wr_en      <= 1'b0;
      if (s_axi_awready)                     s_axi_bvalid <= 1'b1;  // after AW/W handshake
      else if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (wr_fire) begin
        s_axi_awready <= 1'b1;
        s_axi_wready  <= 1'b1;
        s_axi_bresp   <= w_ok ? RESP_OKAY : RESP_SLVERR;
        unique case (waddr)
          A_CTRL: begin
            ce_start <= s_axi_wdata[0];
            nn_start <= s_axi_wdata[1];
          end
          A_CENTROID_WR: begin
            cen_wr_en   <= 1'b1;
            cen_wr_idx  <= s_axi_wdata[31:24];
            cen_wr_sel  <= s_axi_wdata[23:16];
            cen_wr_data <= s_axi_wdata[15:0];
          end
          A_WEIGHT_ADDR: weight_addr <= s_axi_wdata[17:0];
          A_WEIGHT_DATA: begin
            wt_wr_en   <= 1'b1;
            wt_wr_data <= s_axi_wdata[15:0];
          end
          default: ;
        endcase
      end
    end
  end

  // Sticky done flags and the latched model result.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ce_done_q   <= 1'b0;
      nn_done_q   <= 1'b0;
      nn_result_q <= '0;
    end else begin
      if (ce_start)     ce_done_q <= 1'b0;
      else if (ce_done) ce_done_q <= 1'b1;
      if (nn_start)     nn_done_q <= 1'b0;
      else if (nn_done) begin
        nn_done_q   <= 1'b1;
        nn_result_q <= {nn_one_hot, nn_class};
      end
    end
  end

  // Read channel.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_arready <= 1'b0;
      s_axi_rvalid  <= 1'b0;
      s_axi_rdata   <= '0;
      s_axi_rresp   <= RESP_OKAY;
    end else begin
      s_axi_arready <= 1'b0;
      if (s_axi_arready)                     s_axi_rvalid <= 1'b1;  // after AR handshake
      else if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
      if (rd_fire) begin
        s_axi_arready <= 1'b1;
        s_axi_rresp   <= r_ok ? RESP_OKAY : RESP_SLVERR;
        unique case (raddr)
          A_STATUS:      s_axi_rdata <= {25'd0, decouple_status, len_err, vec_valid,
                                         nn_done_q, nn_busy, ce_done_q, ce_busy};
          A_CE_LABEL:    s_axi_rdata <= {24'd0, ce_label};
          A_CE_MIN_IDX:  s_axi_rdata <= {24'd0, ce_min_idx};
          A_CE_DIST_LO:  s_axi_rdata <= ce_min_dist[31:0];
          A_CE_DIST_HI:  s_axi_rdata <= ce_min_dist[63:32];
          A_NN_RESULT:   s_axi_rdata <= {16'd0, nn_result_q};
          A_WEIGHT_ADDR: s_axi_rdata <= {14'd0, weight_addr};
          default:       s_axi_rdata <= '0;
        endcase
      end
    end
  end

  // AXI rules for the master: a raised VALID stays up until accepted.
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_awvalid && !s_axi_awready |=> s_axi_awvalid);
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_wvalid && !s_axi_wready |=> s_axi_wvalid);
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_arvalid && !s_axi_arready |=> s_axi_arvalid);

endmodule
