// tb_sod_operand_path: operand path at N = 8 with a one-cycle memory model.
// Alternates dense (bypass) and sparse (decompressed) runs of random length
// and checks every vector and its order; for dense runs it also checks the
// timing: first vector two cycles after start, then one vector per cycle.
module tb_sod_operand_path;
  import tb_sod_util::*;
  localparam int N = 8, W = 128, L = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, sparse, rd_en, vec_valid, busy;
  logic [15:0] base, rd_addr;
  logic [7:0] nvec;
  logic [W-1:0] rd_data;
  logic [N-1:0][15:0] vec;
  sod_operand_path #(.N_EL(N), .DW(16), .W(W), .L(L)) dut (.*);

  logic [W-1:0] mem [256];
  always @(posedge clk) if (rd_en) rd_data <= mem[rd_addr[7:0]];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int expv [$][];
  int vcyc [$];
  always @(posedge clk) if (rst_n && vec_valid) begin
    int e[];
    vcyc.push_back(cyc);
    if (expv.size() == 0) begin failures++; $display("FAIL: unexpected vector"); end
    else begin
      e = expv.pop_front();
      checks++;
      for (int p = 0; p < N; p++)
        if (vec[p] != 16'(e[p])) begin failures++; $display("FAIL: element %0d", p); break; end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mat[][];
    word_t words[$];
    static int nd = 0, ns = 0;
    int nv, b, t0;
    bit sp;
    start = 0; sparse = 0; base = 0; nvec = 0;
    foreach (mem[i]) mem[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      sp = 1'(it % 2);
      nv = 1 + $urandom % 15;
      b = $urandom % 200;
      rnd_matrix(mat, N, nv, 10 + $urandom % 90);
      if (sp) begin
        pack_csc(mat, N, nv, W, 0, words);
        foreach (words[i]) mem[(b + i) % 256] = words[i][W-1:0];
        ns++;
      end else begin
        foreach (mat[j]) mem[(b + j) % 256] = W'(pack_dense(mat[j], N));
        nd++;
      end
      foreach (mat[j]) expv.push_back(mat[j]);
      vcyc.delete();
      @(negedge clk); start = 1; sparse = sp; base = 16'(b); nvec = 8'(nv); t0 = cyc;
      @(negedge clk); start = 0;
      while (busy) @(negedge clk);
      checks++;
      if (expv.size() != 0) begin failures++; $display("FAIL: missing vectors"); expv.delete(); end
      if (!sp) begin
        checks++;
        if (vcyc[0] - t0 != 2 || vcyc[nv-1] - vcyc[0] != nv - 1) begin
          failures++; $display("FAIL: dense timing %0d %0d", vcyc[0] - t0, vcyc[nv-1] - vcyc[0]);
        end
      end
    end
    checks++;
    if (nd == 0 || ns == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
