// tb_sod_controller: controller at N = 4, 64-bit words, 8 accumulator rows,
// against a scripted environment (weight vectors with random gaps, an
// accumulator count that rises at random times, a one-cycle accumulator read
// port returning a known pattern). Checks per pass: commit right after the
// N-th weight vector, input path and accumulator started in the commit cycle
// with the command's fields, write-back of every row as two words at
// out_base + 2*row + half with the right halves, no write-back when wb_en = 0,
// and one done pulse.
module tb_sod_controller;
  import sod_pkg::*;
  localparam int N = 4, W = 64, PW = 32, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, busy, done;
  sod_cmd_t cmd;
  ctrl_state_e state_o;
  logic w_start, w_sparse, w_vec_valid, w_commit, i_start, i_sparse;
  logic [15:0] w_base, i_base, wb_addr;
  logic [7:0] w_nvec, i_nvec;
  logic acc_start, acc_first, acc_rd_en, wb_en;
  logic [3:0] acc_count;
  logic [2:0] acc_rd_addr;
  logic [N-1:0][PW-1:0] acc_rd_data;
  logic [W-1:0] wb_data;
  sod_controller #(.N_EL(N), .PW(PW), .W(W), .ACC_D(D)) dut (.*);

  function automatic logic [N-1:0][PW-1:0] row_pat(input int r);
    logic [N-1:0][PW-1:0] v;
    for (int c = 0; c < N; c++) v[c] = 32'(r * 1000 + c * 7 + 1);
    return v;
  endfunction
  always @(posedge clk) if (acc_rd_en) acc_rd_data <= row_pat(int'(acc_rd_addr));

  int wvalids, commits, istarts, dones, writes;
  logic [N-1:0][PW-1:0] exp_row;
  always @(posedge clk) if (rst_n) begin
    if (w_vec_valid) wvalids++;
    if (w_commit) begin
      commits++;
      checks++;
      if (wvalids != N) begin failures++; $display("FAIL: commit after %0d weight vectors", wvalids); end
    end
    if (i_start) begin
      istarts++;
      checks++;
      if (!w_commit || !acc_start || i_sparse != cmd.i_sparse || i_base != cmd.i_base ||
          i_nvec != cmd.n_vec || acc_first != cmd.acc_first) begin
        failures++; $display("FAIL: input start fields");
      end
    end
    if (wb_en) begin
      int r, h;
      r = writes / 2; h = writes % 2;
      exp_row = row_pat(r);
      checks++;
      if (!cmd.wb_en || wb_addr != cmd.out_base + 16'(writes) ||
          wb_data != W'({exp_row} >> (h * W))) begin
        failures++; $display("FAIL: write-back %0d addr %h", writes, wb_addr);
      end
      writes++;
    end
    if (done) dones++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 0; cmd = '0; w_vec_valid = 0; acc_count = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int p = 0; p < 12; p++) begin
      wvalids = 0; commits = 0; istarts = 0; dones = 0; writes = 0;
      @(negedge clk);
      cmd.w_base = 16'($urandom); cmd.w_sparse = 1'($urandom);
      cmd.i_base = 16'($urandom); cmd.i_sparse = 1'($urandom);
      cmd.n_vec = 8'(1 + $urandom % D); cmd.acc_first = 1'($urandom);
      cmd.wb_en = (p % 3) != 1; cmd.out_base = 16'($urandom % 1000);
      cmd_valid = 1;
      #1; checks++;
      if (!w_start || w_base != cmd.w_base || w_sparse != cmd.w_sparse || int'(w_nvec) != N) begin
        failures++; $display("FAIL: weight start");
      end
      @(negedge clk); cmd_valid = 0;
      for (int k = 0; k < N; ) begin
        w_vec_valid = ($urandom % 2) == 0;
        if (w_vec_valid) k++;
        @(negedge clk);
      end
      w_vec_valid = 0;
      wait (acc_start);
      @(negedge clk); acc_count = 0;
      while (acc_count != 4'(cmd.n_vec)) begin
        repeat ($urandom % 3) @(negedge clk);
        acc_count = acc_count + 1;
        @(negedge clk);
      end
      while (busy) @(negedge clk);
      checks++;
      if (commits != 1 || istarts != 1 || dones != 1 ||
          writes != (cmd.wb_en ? 2 * int'(cmd.n_vec) : 0)) begin
        failures++; $display("FAIL: pass %0d: commits %0d starts %0d dones %0d writes %0d", p, commits, istarts, dones, writes);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
