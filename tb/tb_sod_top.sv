// tb_sod_top: end-to-end test of the accelerator at N = 8 (8 x 8 PE array,
// 128-bit global-buffer words, 1024-word buffer, 16 accumulator rows).
// Each job computes Y = sum over k of M_k * X_k for K = 1..3 weight tiles:
// random weight tiles and input blocks of random density are written into the
// global buffer through the host port, dense or CSC per operand (all four
// format combinations), one pass per tile (first pass overwrites, later passes
// accumulate, the last writes back), and the results are read back through
// the host port and compared with a reference computed here.
// Mechanism counters (each must be seen at least once): sparse and dense
// weight/input passes, input bubbles while the decompressor is behind,
// columns spanning several non-zero words, words shared by several columns,
// empty columns, pointer wrap-around, accumulating passes, write-backs.
module tb_sod_top;
  import sod_pkg::*;
  import tb_sod_util::*;
  localparam int N = 8, W = N * 16, GBD = 1024, ACCD = 16, WPR = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_wr_en, host_rd_en, cmd_valid, busy, done;
  logic [15:0] host_wr_addr, host_rd_addr;
  logic [W-1:0] host_wr_data, host_rd_data;
  sod_cmd_t cmd;
  sod_top #(.N_EL(N), .GB_D(GBD), .ACC_D(ACCD)) dut (.*);

  // mechanism counters
  int n_wsparse, n_wdense, n_isparse, n_idense, n_bubble, n_span, n_shared,
      n_empty, n_wrap, n_accum, n_wb;

  task automatic watch_decomp(input bit run, input bit cdone, input int k, input int cnt,
                              input int rem, input int lo, input int hi);
    if (run) begin
      if (k != 0 && !cdone) n_span++;
      if (cdone && cnt - k > 0) n_shared++;
      if (cdone && rem == 0) n_empty++;
      if (hi < lo) n_wrap++;
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    watch_decomp(dut.u_wpath.u_decomp.run, dut.u_wpath.u_decomp.col_done,
                 int'(dut.u_wpath.u_decomp.k), int'(dut.u_wpath.u_decomp.count),
                 int'(dut.u_wpath.u_decomp.rem), int'(dut.u_wpath.u_decomp.ptr_lo),
                 int'(dut.u_wpath.u_decomp.ptr_hi));
    watch_decomp(dut.u_ipath.u_decomp.run, dut.u_ipath.u_decomp.col_done,
                 int'(dut.u_ipath.u_decomp.k), int'(dut.u_ipath.u_decomp.count),
                 int'(dut.u_ipath.u_decomp.rem), int'(dut.u_ipath.u_decomp.ptr_lo),
                 int'(dut.u_ipath.u_decomp.ptr_hi));
    if (dut.u_ipath.u_decomp.busy && dut.ctrl_state == C_STREAM && !dut.i_vec_valid) n_bubble++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wr_ptr;
  task automatic host_write(input word_t w);
    @(negedge clk);
    host_wr_en = 1; host_wr_addr = 16'(wr_ptr); host_wr_data = w[W-1:0];
    wr_ptr++;
    @(negedge clk);
    host_wr_en = 0;
  endtask

  // store a block (columns of length N) dense or CSC; returns its base
  task automatic store(input int mat[][], input int nc, input bit sp, output int b);
    word_t words[$];
    b = wr_ptr;
    if (sp) begin
      pack_csc(mat, N, nc, W, $urandom % 256, words);
      foreach (words[i]) host_write(words[i]);
    end else begin
      for (int j = 0; j < nc; j++) host_write(pack_dense(mat[j], N));
    end
  endtask

  task automatic run_pass(input int wb, input bit ws, input int ib, input bit is, input int nv,
                          input bit first, input bit wben, input int ob);
    @(negedge clk);
    cmd = '0;
    cmd.w_base = 16'(wb); cmd.w_sparse = ws; cmd.i_base = 16'(ib); cmd.i_sparse = is;
    cmd.n_vec = 8'(nv); cmd.acc_first = first; cmd.wb_en = wben; cmd.out_base = 16'(ob);
    cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
    if (ws) n_wsparse++; else n_wdense++;
    if (is) n_isparse++; else n_idense++;
    if (!first) n_accum++;
    if (wben) n_wb++;
  endtask

  task automatic job(input int kt, input int nv, input int dw, input int di, input int mode);
    int wm[][], xm[][];
    int expy[][];
    int wb, ib, ob;
    bit ws, is;
    expy = new[nv];
    foreach (expy[t]) begin expy[t] = new[N]; foreach (expy[t][c]) expy[t][c] = 0; end
    ob = 900;
    wr_ptr = 0;
    for (int k = 0; k < kt; k++) begin
      ws = mode[0]; is = mode[1];
      rnd_matrix(wm, N, N, dw);
      rnd_matrix(xm, N, nv, di);
      store(wm, N, ws, wb);
      store(xm, nv, is, ib);
      for (int t = 0; t < nv; t++)
        for (int c = 0; c < N; c++)
          for (int m = 0; m < N; m++) expy[t][c] += wm[m][c] * xm[t][m];
      run_pass(wb, ws, ib, is, nv, k == 0, k == kt - 1, ob);
    end
    for (int t = 0; t < nv; t++)
      for (int h = 0; h < WPR; h++) begin
        @(negedge clk); host_rd_en = 1; host_rd_addr = 16'(ob + t * WPR + h);
        @(negedge clk); host_rd_en = 0;
        for (int l = 0; l < W / 32; l++) begin
          checks++;
          if (host_rd_data[l*32 +: 32] != 32'(expy[t][h*(W/32) + l])) begin
            failures++;
            if (failures < 10) $display("FAIL: mode %0d vec %0d col %0d got %0d exp %0d", mode, t,
                                        h*(W/32) + l, $signed(host_rd_data[l*32 +: 32]), expy[t][h*(W/32) + l]);
          end
        end
      end
  endtask

  initial begin
    host_wr_en = 0; host_rd_en = 0; cmd_valid = 0; cmd = '0; host_wr_addr = 0; host_wr_data = '0;
    host_rd_addr = 0;
    {n_wsparse, n_wdense, n_isparse, n_idense, n_bubble, n_span, n_shared, n_empty, n_wrap, n_accum, n_wb} = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int j = 0; j < 24; j++)
      job(1 + j % 3, 1 + $urandom % 15, 10 + $urandom % 91, 10 + $urandom % 91, j % 4);
    // very sparse and fully dense corner jobs
    job(2, 15, 0, 100, 3);
    job(2, 15, 100, 100, 3);
    $display("mechanisms: wsparse=%0d wdense=%0d isparse=%0d idense=%0d bubble=%0d span=%0d shared=%0d empty=%0d wrap=%0d accum=%0d wb=%0d",
             n_wsparse, n_wdense, n_isparse, n_idense, n_bubble, n_span, n_shared, n_empty, n_wrap, n_accum, n_wb);
    if (n_wsparse == 0) begin failures++; $display("FAIL: no sparse weight pass"); end
    if (n_wdense == 0)  begin failures++; $display("FAIL: no dense weight pass"); end
    if (n_isparse == 0) begin failures++; $display("FAIL: no sparse input pass"); end
    if (n_idense == 0)  begin failures++; $display("FAIL: no dense input pass"); end
    if (n_bubble == 0)  begin failures++; $display("FAIL: no input bubble"); end
    if (n_span == 0)    begin failures++; $display("FAIL: no multi-word column"); end
    if (n_shared == 0)  begin failures++; $display("FAIL: no shared word"); end
    if (n_empty == 0)   begin failures++; $display("FAIL: no empty column"); end
    if (n_wrap == 0)    begin failures++; $display("FAIL: no pointer wrap"); end
    if (n_accum == 0)   begin failures++; $display("FAIL: no accumulating pass"); end
    if (n_wb == 0)      begin failures++; $display("FAIL: no write-back"); end
    checks += 11;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
