// tb_sod_workloads: runs the operand-density cases the architecture is meant
// for on a 16 x 16 instance of the accelerator (256-bit words, 10 non-zero
// entries per word, so a full-rate decompressor covers columns up to 62.5 %
// dense, close to the 42 / 64 of the default size).
//   - dense x dense through both bypasses (density 1.0);
//   - a weight-density sweep 0.1 .. 1.0 with CSC weights and dense inputs;
//   - a sweep 0.1 .. 1.0 with both operands in CSC;
//   - the densities of pruned models: AlexNet conv (weights 0.41, inputs 0.69),
//     VGG-16 conv (0.33, 0.61), BERT on SQuAD (0.33, dense inputs) and BERT on
//     MNLI (0.12, dense inputs).
// Every case computes Y = M0 X0 + M1 X1 (K = 2 tiles, 24 input vectors), is
// compared value by value with a reference computed here, and checks each
// pass's cycle count against a rate model: a pass can be no faster than one
// vector per cycle on both paths, and no slower than what the words fetched
// and the columns longer than one word cost. The model and the layer sizes
// are this testbench's own; only the densities come from the architecture's
// evaluation.
module tb_sod_workloads;
  import sod_pkg::*;
  import tb_sod_util::*;
  localparam int NN = 16, W = NN * 16, L = W / 24, WPR = NN * 32 / W, NV = 24;
  localparam int LATA = 2 * NN - 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_wr_en, host_rd_en, cmd_valid, busy, done;
  logic [15:0] host_wr_addr, host_rd_addr;
  logic [W-1:0] host_wr_data, host_rd_data;
  sod_cmd_t cmd;
  sod_top #(.N_EL(NN), .GB_D(4096), .ACC_D(32)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wr_ptr = 0;
  task automatic host_write(input word_t w);
    @(negedge clk);
    host_wr_en = 1; host_wr_addr = 16'(wr_ptr); host_wr_data = W'(w);
    wr_ptr++;
    @(negedge clk);
    host_wr_en = 0;
  endtask

  // stores an operand, returns its base and the cycles one decompression
  // of it may take at most: the larger of the column count (each column at
  // least one cycle, a column of n entries ceil(n / L) cycles) and the words
  // fetched, plus the start-up latency
  task automatic store(input int mat[][], input int nc, input bit sp,
                       output int b, output int tmax);
    word_t words[$];
    int colc, n;
    b = wr_ptr;
    if (sp) begin
      pack_csc(mat, NN, nc, W, int'($urandom % 256), words);
      foreach (words[i]) host_write(words[i]);
      colc = 0;
      for (int j = 0; j < nc; j++) begin
        n = 0;
        for (int i = 0; i < NN; i++) if (mat[j][i] != 0) n++;
        colc += (n == 0) ? 1 : (n + L - 1) / L;
      end
      tmax = 5 + ((colc > words.size()) ? colc : words.size());
    end else begin
      for (int j = 0; j < nc; j++) host_write(pack_dense(mat[j], NN));
      tmax = 2 + nc;
    end
  endtask

  task automatic run_case(input string name, input int wd, input bit ws,
                          input int id, input bit is);
    int wm[][], xm[][];
    int expy[NV][NN];
    int wb, ib, t0, ob, tw, ti, tpass, tmin, tmaxp, worst;
    wr_ptr = 0;
    ob = 4000;
    worst = 0;
    foreach (expy[t, c]) expy[t][c] = 0;
    for (int k = 0; k < 2; k++) begin
      rnd_matrix(wm, NN, NN, wd);
      rnd_matrix(xm, NN, NV, id);
      store(wm, NN, ws, wb, tw);
      store(xm, NV, is, ib, ti);
      for (int t = 0; t < NV; t++)
        for (int c = 0; c < NN; c++)
          for (int m = 0; m < NN; m++) expy[t][c] += wm[m][c] * xm[t][m];
      @(negedge clk);
      cmd = '0;
      cmd.w_base = 16'(wb); cmd.w_sparse = ws; cmd.i_base = 16'(ib); cmd.i_sparse = is;
      cmd.n_vec = 8'(NV); cmd.acc_first = (k == 0); cmd.wb_en = (k == 1);
      cmd.out_base = 16'(ob);
      cmd_valid = 1; t0 = cyc;
      @(negedge clk); cmd_valid = 0;
      while (!done) @(negedge clk);
      tpass = cyc - t0;
      // load the weights, commit, stream the inputs, drain the array,
      // write back 3 cycles per accumulator row
      tmin  = (ws ? 5 + NN : 2 + NN) + (is ? 5 : 2) + NV + LATA + (k == 1 ? 3 * NV : 0);
      tmaxp = tw + ti + LATA + (k == 1 ? 3 * NV : 0) + 8;
      checks++;
      if (tpass < tmin || tpass > tmaxp) begin
        failures++;
        $display("FAIL: %s pass %0d took %0d cycles, model %0d..%0d", name, k, tpass, tmin, tmaxp);
      end
      if (tpass - (k == 1 ? 3 * NV : 0) > worst) worst = tpass - (k == 1 ? 3 * NV : 0);
    end
    for (int t = 0; t < NV; t++)
      for (int h = 0; h < WPR; h++) begin
        @(negedge clk); host_rd_en = 1; host_rd_addr = 16'(ob + t * WPR + h);
        @(negedge clk); host_rd_en = 0;
        for (int l = 0; l < W / 32; l++) begin
          checks++;
          if (host_rd_data[l*32 +: 32] != 32'(expy[t][h*(W/32) + l])) begin
            failures++;
            if (failures < 10) $display("FAIL: %s vec %0d col %0d", name, t, h*(W/32) + l);
          end
        end
      end
    $display("%-28s w %3d%% %s  x %3d%% %s  slowest pass without write-back %0d cycles (full rate %0d)",
             name, wd, ws ? "csc  " : "dense", id, is ? "csc  " : "dense", worst,
             (ws ? 5 + NN : 2 + NN) + (is ? 5 : 2) + NV + LATA);
  endtask

  initial begin
    host_wr_en = 0; host_rd_en = 0; cmd_valid = 0; cmd = '0; host_wr_addr = 0;
    host_wr_data = '0; host_rd_addr = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run_case("dense NN", 100, 0, 100, 0);
    for (int d = 10; d <= 100; d += 10) run_case("sweep: sparse W, dense X", d, 1, 100, 0);
    for (int d = 10; d <= 100; d += 10) run_case("sweep: sparse W, sparse X", d, 1, d, 1);
    run_case("AlexNet conv", 41, 1, 69, 1);
    run_case("VGG-16 conv", 33, 1, 61, 1);
    run_case("BERT SQuAD", 33, 1, 100, 0);
    run_case("BERT MNLI", 12, 1, 100, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
