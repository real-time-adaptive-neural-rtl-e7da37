// axis_master_bfm: AXI4-Stream master for testbenches (stands in for the
// DMA's MM2S channel). send() transmits one frame, one 16-bit feature per
// 32-bit beat, TLAST on the last beat, and counts beats that had to wait
// for TREADY.
module axis_master_bfm (
  input  logic        clk,
  output logic        tvalid,
  input  logic        tready,
  output logic [31:0] tdata,
  output logic        tlast
);
  int stalls = 0;
  initial begin tvalid = 0; tdata = '0; tlast = 0; end

  task automatic send(input int v [], input int nbeats);
    for (int i = 0; i < nbeats; i++) begin
      @(negedge clk);
      tvalid = 1;
      tdata  = {16'h0, 16'((i < v.size()) ? v[i] : 0)};
      tlast  = (i == nbeats - 1);
      @(posedge clk);
      while (!tready) begin stalls++; @(posedge clk); end
    end
    @(negedge clk) begin tvalid = 0; tlast = 0; end
  endtask
endmodule
