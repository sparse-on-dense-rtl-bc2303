// tb_sod_top_full: one complete operation on the accelerator at its default
// size: 64 x 64 PE array, 2 MB global buffer of 1024-bit words, 128-row
// accumulator. It computes Y = M0 * X0 + M1 * X1 for 32 input vectors, with
// K = 128 split into two 64-row tiles: tile 0 with CSC weights (about 40 %
// dense) and CSC inputs (about 70 % dense), tile 1 with CSC weights and dense
// inputs. Data goes in through the host port, the result is read back through
// it and compared with a reference computed here; the cycles of each pass are
// reported and bounded.
module tb_sod_top_full;
  import sod_pkg::*;
  import tb_sod_util::*;
  localparam int NN = 64, W = 1024, WPR = 2, NV = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_wr_en, host_rd_en, cmd_valid, busy, done;
  logic [15:0] host_wr_addr, host_rd_addr;
  logic [W-1:0] host_wr_data, host_rd_data;
  sod_cmd_t cmd;
  sod_top dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wr_ptr = 0;
  task automatic host_write(input word_t w);
    @(negedge clk);
    host_wr_en = 1; host_wr_addr = 16'(wr_ptr); host_wr_data = w;
    wr_ptr++;
    @(negedge clk);
    host_wr_en = 0;
  endtask

  task automatic store(input int mat[][], input int nc, input bit sp, output int b);
    word_t words[$];
    b = wr_ptr;
    if (sp) begin
      pack_csc(mat, NN, nc, W, 0, words);
      foreach (words[i]) host_write(words[i]);
    end else begin
      for (int j = 0; j < nc; j++) host_write(pack_dense(mat[j], NN));
    end
  endtask

  initial begin
    int wm[][], xm[][];
    int expy[NV][NN];
    int wb, ib, t0, ob;
    bit is;
    host_wr_en = 0; host_rd_en = 0; cmd_valid = 0; cmd = '0; host_wr_addr = 0;
    host_wr_data = '0; host_rd_addr = 0;
    foreach (expy[t, c]) expy[t][c] = 0;
    ob = 16000;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 2; k++) begin
      is = (k == 0);
      rnd_matrix(wm, NN, NN, 40);
      rnd_matrix(xm, NN, NV, 70);
      store(wm, NN, 1'b1, wb);
      store(xm, NV, is, ib);
      for (int t = 0; t < NV; t++)
        for (int c = 0; c < NN; c++)
          for (int m = 0; m < NN; m++) expy[t][c] += wm[m][c] * xm[t][m];
      @(negedge clk);
      cmd = '0;
      cmd.w_base = 16'(wb); cmd.w_sparse = 1'b1; cmd.i_base = 16'(ib); cmd.i_sparse = is;
      cmd.n_vec = 8'(NV); cmd.acc_first = (k == 0); cmd.wb_en = (k == 1); cmd.out_base = 16'(ob);
      cmd_valid = 1; t0 = cyc;
      @(negedge clk); cmd_valid = 0;
      while (!done) @(negedge clk);
      $display("pass %0d: %0d cycles", k, cyc - t0);
      // weights ~26 non-zeros per column stream at up to one column per cycle;
      // the pass is bounded by load + stream + drain + write-back
      checks++;
      if (cyc - t0 > 4 * NN + 2 * NV + 2 * NN + 2 * WPR * NV + 40) begin
        failures++; $display("FAIL: pass %0d too slow", k);
      end
    end
    for (int t = 0; t < NV; t++)
      for (int h = 0; h < WPR; h++) begin
        @(negedge clk); host_rd_en = 1; host_rd_addr = 16'(ob + t * WPR + h);
        @(negedge clk); host_rd_en = 0;
        for (int l = 0; l < W / 32; l++) begin
          checks++;
          if (host_rd_data[l*32 +: 32] != 32'(expy[t][h*(W/32) + l])) begin
            failures++;
            if (failures < 10) $display("FAIL: vec %0d col %0d", t, h*(W/32) + l);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
