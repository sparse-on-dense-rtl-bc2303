// tb_sod_nz_buffer: queue test at L = 5 (depth 15). Random pushes of whole
// words and pops of 0..count entries in the same cycle, respecting the room
// rule; head and count are compared with a reference queue every cycle, and
// clear is exercised.
module tb_sod_nz_buffer;
  localparam int L = 5, D = 15;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear, push;
  sod_pkg::nz_entry_t [L-1:0] push_data, head;
  logic [3:0] pop_n, count;
  sod_nz_buffer #(.L(L), .DEPTH(D)) dut (.*);
  logic [23:0] q [$];

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p;
    clear = 0; push = 0; pop_n = 0; push_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      clear = ($urandom % 200) == 0;
      p = (q.size() == 0) ? 0 : $urandom % (q.size() + 1);
      pop_n = 4'(p);
      push = ((q.size() - p + L) <= D) && (($urandom % 3) != 0);
      for (int e = 0; e < L; e++) push_data[e] = 24'($urandom);
      @(posedge clk);
      if (clear) q.delete();
      else begin
        for (int i = 0; i < p; i++) void'(q.pop_front());
        if (push) for (int e = 0; e < L; e++) q.push_back(push_data[e]);
      end
      #1;
      checks++;
      if (int'(count) != q.size()) begin failures++; $display("FAIL: count %0d exp %0d", count, q.size()); end
      for (int e = 0; e < L && e < q.size(); e++) begin
        checks++;
        if (head[e] != q[e]) begin failures++; $display("FAIL: head[%0d]", e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
