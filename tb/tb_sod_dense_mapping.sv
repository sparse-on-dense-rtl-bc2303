// tb_sod_dense_mapping: random scatter test at N = 8, L = 5: selected entries
// with distinct indices land at their index, others keep the old value,
// unselected entries and indices >= N change nothing.
module tb_sod_dense_mapping;
  localparam int N = 8, L = 5;
  int checks = 0, failures = 0;
  sod_pkg::nz_entry_t [L-1:0] ent;
  logic [L-1:0] sel;
  logic [N-1:0][15:0] cur, nxt, exp_v;
  sod_dense_mapping #(.N(N), .L(L), .DW(16)) dut (.*);
  initial begin
    int perm[12];
    for (int it = 0; it < 5000; it++) begin
      for (int i = 0; i < 12; i++) perm[i] = i;
      perm.shuffle();
      for (int p = 0; p < N; p++) cur[p] = 16'($urandom);
      for (int e = 0; e < L; e++) begin
        ent[e].idx = 8'(perm[e]);         // distinct, some >= N
        ent[e].val = 16'($urandom);
        sel[e] = ($urandom % 3) != 0;
      end
      exp_v = cur;
      for (int e = 0; e < L; e++)
        if (sel[e] && perm[e] < N) exp_v[perm[e]] = ent[e].val;
      #1;
      checks++;
      if (nxt != exp_v) begin failures++; if (failures < 10) $display("FAIL: it %0d", it); end
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
