// tb_sod_decomp_unit: decompression unit at N = 8 (128-bit words, L = 5
// entries per word, up to 15 columns per block) against a one-cycle-latency
// memory model. Random CSC blocks of 1..15 columns at densities 0..100 %
// (empty columns, columns longer than one word, words shared by columns,
// pointers wrapping at 8 bits) must come out as the right dense vectors in
// order. Timing: a block whose columns all hold exactly L non-zeros must
// deliver one vector per cycle, the first FIRST_LAT cycles after start.
module tb_sod_decomp_unit;
  import tb_sod_util::*;
  localparam int N = 8, W = 128, L = 5, FIRST_LAT = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, rd_en, vec_valid, busy;
  logic [15:0] base, rd_addr;
  logic [7:0] ncols;
  logic [W-1:0] rd_data;
  logic [N-1:0][15:0] vec;
  sod_decomp_unit #(.N_EL(N), .DW(16), .W(W), .L(L)) dut (.*);

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
        if (vec[p] != 16'(e[p])) begin
          failures++; $display("FAIL: vector element %0d got %h exp %h", p, vec[p], 16'(e[p])); break;
        end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_block(input int mat[][], input int nc, input int b, output int t0);
    word_t words[$];
    pack_csc(mat, N, nc, W, $urandom % 256, words);
    foreach (words[i]) mem[(b + i) % 256] = words[i][W-1:0];
    foreach (mat[j]) expv.push_back(mat[j]);
    vcyc.delete();
    @(negedge clk);
    start = 1; base = 16'(b); ncols = 8'(nc);
    t0 = cyc;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    checks++;
    if (expv.size() != 0) begin failures++; $display("FAIL: %0d vectors missing", expv.size()); expv.delete(); end
  endtask

  initial begin
    int mat[][];
    int t0, nc;
    static int dens[6] = '{0, 15, 40, 60, 85, 100};
    start = 0; base = 0; ncols = 0;
    foreach (mem[i]) mem[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 120; it++) begin
      nc = 1 + $urandom % 15;
      rnd_matrix(mat, N, nc, dens[it % 6]);
      run_block(mat, nc, $urandom % 256, t0);
    end
    // full-rate block: every column exactly L non-zeros
    mat = new[15];
    foreach (mat[j]) begin
      automatic int perm[8] = '{0,1,2,3,4,5,6,7};
      perm.shuffle();
      mat[j] = new[N];
      foreach (mat[j][i]) mat[j][i] = 0;
      for (int e = 0; e < L; e++) mat[j][perm[e]] = rnd_val();
    end
    run_block(mat, 15, 40, t0);
    checks++;
    if (vcyc[0] - t0 != FIRST_LAT) begin failures++; $display("FAIL: first vector after %0d cycles", vcyc[0] - t0); end
    checks++;
    if (vcyc[14] - vcyc[0] != 14) begin failures++; $display("FAIL: 15 vectors took %0d cycles", vcyc[14] - vcyc[0] + 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
