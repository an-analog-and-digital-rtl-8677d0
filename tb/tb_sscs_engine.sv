// tb_sscs_engine: random zero flags, TG input, precharge and SSCS enable;
// every TG control output is compared with the SSCS rule: a column with a
// zero query element is cut from charge sharing outside precharge when SSCS
// is on, and otherwise follows TG_in.
module tb_sscs_engine;
  int checks = 0, failures = 0;
  logic tg_in, prech, sscs_en;
  logic [63:0] q_zero, tg_ctrl;
  sscs_engine dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 200; t++) begin
      tg_in = 1'($urandom); prech = 1'($urandom); sscs_en = 1'($urandom);
      q_zero = {$urandom, $urandom};
      #1;
      for (int n = 0; n < 64; n++) begin
        logic exp_v;
        exp_v = tg_in;
        if (sscs_en && q_zero[n] && !prech) exp_v = 0;
        checks++;
        if (tg_ctrl[n] !== exp_v) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
