// tb_sod_element_select: random test of the element selector at the default
// L = 42: k = min(rem, avail, L), the selection mask and col_done.
module tb_sod_element_select;
  localparam int L = 42;
  int checks = 0, failures = 0;
  logic en, col_done;
  logic [7:0] rem;
  logic [6:0] avail, k;
  logic [L-1:0] sel, exp_sel;
  sod_element_select dut (.*);
  initial begin
    int m;
    for (int it = 0; it < 20000; it++) begin
      en = ($urandom % 8) != 0;
      rem = 8'($urandom % 70);
      avail = 7'($urandom % 127);
      #1;
      m = int'(rem);
      if (int'(avail) < m) m = int'(avail);
      if (L < m) m = L;
      if (!en) m = 0;
      for (int e = 0; e < L; e++) exp_sel[e] = (e < m);
      checks++;
      if (int'(k) != m || sel != exp_sel || col_done != (en && m == int'(rem))) begin
        failures++;
        if (failures < 10) $display("FAIL: en %0d rem %0d avail %0d -> k %0d done %0d", en, rem, avail, k, col_done);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
