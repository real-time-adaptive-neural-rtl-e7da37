// tb_dfx_decoupler: random values on every crossing signal, with decouple
// low and high; checks that all control and result signals pass unchanged
// when coupled and read 0 when decoupled, in both directions.
module tb_dfx_decoupler;
  logic decouple, decouple_status, s_start, s_wr_en, rp_start, rp_wr_en;
  logic rp_busy, rp_done, s_busy, s_done;
  logic [1:0] rp_class_idx, s_class_idx;
  logic [3:0] rp_one_hot, s_one_hot;
  int checks = 0, failures = 0;

  dfx_decoupler #(.CLS_W(2), .N_CLASSES(4)) dut (.*);

  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      logic [9:0] r;
      r = 10'($urandom);
      decouple = (t % 2 == 1);
      {s_start, s_wr_en, rp_busy, rp_done, rp_class_idx, rp_one_hot} = r;
      #1;
      checks++;
      if (decouple_status !== decouple) begin failures++; $display("FAIL status"); end
      checks++;
      if (decouple) begin
        if ({rp_start, rp_wr_en, s_busy, s_done, s_class_idx, s_one_hot} !== '0) begin
          failures++; $display("FAIL leak while decoupled");
        end
      end else begin
        if ({rp_start, rp_wr_en, s_busy, s_done, s_class_idx, s_one_hot} !== r) begin
          failures++; $display("FAIL pass-through");
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
