// tb_overlap_detect: random kept/resident sets; checks the fetch and reuse
// vectors and their counts against a bit-by-bit reference.
module tb_overlap_detect;
  int checks = 0, failures = 0;
  logic [63:0] u, resident, fetch, reuse;
  logic [6:0] n_fetch, n_reuse;
  overlap_detect dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 300; t++) begin
      int nf, nr;
      u = {$urandom, $urandom}; resident = {$urandom, $urandom};
      if (t % 3 == 0) resident = u;
      #1;
      nf = 0; nr = 0;
      for (int j = 0; j < 64; j++) begin
        checks++;
        if (fetch[j] !== (u[j] && !resident[j]) || reuse[j] !== (u[j] && resident[j])) failures++;
        if (u[j] && !resident[j]) nf++;
        if (u[j] && resident[j]) nr++;
      end
      checks++; if (int'(n_fetch) != nf || int'(n_reuse) != nr) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
