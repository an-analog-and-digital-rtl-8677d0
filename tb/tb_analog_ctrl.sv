// tb_analog_ctrl: runs a batch of three queries and compares the control
// outputs cycle by cycle with the expected schedule (clear; for q bits 0..3:
// precharge, multiply, accumulate, sample, store; K-BWS for k bits 0..3;
// compare; capture; push), including the query slot. The index FIFO is held
// full for five cycles at the second push to check the stall. It checks the
// 28-cycle query time and that busy drops afterwards.
module tb_analog_ctrl;
  import attn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, start = 0, out_full = 0;
  logic [2:0] nq;
  actl_t ctl;
  logic push, stall, busy;
  analog_ctrl dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // expected step k of a query: returns the one-hot name as a string
  function automatic string step_name(int k);
    if (k == 0) return "clr";
    if (k <= 20) begin
      case ((k - 1) % 5)
        0: return "prech";
        1: return "mult";
        2: return "acc";
        3: return "sp";
        default: return "st";
      endcase
    end
    if (k <= 24) return "kst";
    if (k == 25) return "comp";
    if (k == 26) return "cap";
    return "push";
  endfunction

  function automatic string got_name();
    int n;
    string s;
    n = 0; s = "none";
    if (ctl.pe_clr) begin n++; s = "clr"; end
    if (ctl.prech)  begin n++; s = "prech"; end
    if (ctl.mult)   begin n++; s = "mult"; end
    if (ctl.acc)    begin n++; s = "acc"; end
    if (ctl.q_sp)   begin n++; s = "sp"; end
    if (ctl.q_st)   begin n++; s = "st"; end
    if (ctl.k_st)   begin n++; s = "kst"; end
    if (ctl.comp)   begin n++; s = "comp"; end
    if (ctl.cap)    begin n++; s = "cap"; end
    if (push || stall) begin n++; s = "push"; end
    if (n > 1) s = "multiple";
    return s;
  endfunction

  initial begin
    int cyc, stalls;
    @(posedge clk); #1; rst_n = 1;
    checks++; if (busy) failures++;
    nq = 3; start = 1;
    @(posedge clk); #1; start = 0;
    cyc = 0; stalls = 0;
    for (int q = 0; q < 3; q++) begin
      for (int k = 0; k < 28; k++) begin
        if (q == 1 && k == 27 && stalls < 5) begin
          out_full = 1;
          #1;
          checks++; if (!stall || push) failures++;
          stalls++; k--;
        end else begin
          out_full = 0;
          #1;
          checks++;
          if (got_name() != step_name(k)) begin
            failures++;
            $display("q%0d step %0d: got %s expected %s", q, k, got_name(), step_name(k));
          end
          checks++; if (int'(ctl.qsel) != q) failures++;
          if (k >= 1 && k <= 20) begin
            checks++; if (int'(ctl.qbit) != (k - 1) / 5) failures++;
          end
          if (k >= 21 && k <= 24) begin
            checks++; if (int'(ctl.k_sel) != k - 21) failures++;
          end
          if (k == 27) begin checks++; if (!push) failures++; end
        end
        @(posedge clk); #1;
        cyc++;
      end
    end
    checks++; if (cyc != 3 * 28 + 5) failures++;
    checks++; if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
