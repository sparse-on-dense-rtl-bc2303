// tb_sod_accumulator: 4 lanes, 8 rows. Pass 1 (first = 1) writes 8 vectors
// with gaps, passes 2 and 3 (first = 0) add more; checks count and every row
// through the registered read port (one-cycle latency), then checks that a
// new first pass overwrites.
module tb_sod_accumulator;
  localparam int C = 4, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, first, y_valid, rd_en;
  logic [C-1:0][31:0] y_in, rd_data;
  logic [3:0] count;
  logic [2:0] rd_addr;
  sod_accumulator #(.N_COLS(C), .PW(32), .DEPTH(D)) dut (.*);
  int model [D][C];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pass(input bit f, input int nrows);
    @(negedge clk); start = 1; first = f;
    @(negedge clk); start = 0;
    for (int r = 0; r < nrows; ) begin
      @(negedge clk);
      y_valid = ($urandom % 3) != 0;
      for (int c = 0; c < C; c++) y_in[c] = $urandom;
      if (y_valid) begin
        for (int c = 0; c < C; c++) model[r][c] = (f ? 0 : model[r][c]) + int'(y_in[c]);
        r++;
      end
    end
    @(negedge clk); y_valid = 0;
    #1; checks++;
    if (int'(count) != nrows) begin failures++; $display("FAIL: count %0d", count); end
  endtask

  task automatic readback(input int nrows);
    for (int r = 0; r < nrows; r++) begin
      @(negedge clk); rd_en = 1; rd_addr = 3'(r);
      @(negedge clk); rd_en = 0;
      for (int c = 0; c < C; c++) begin
        checks++;
        if (rd_data[c] != 32'(model[r][c])) begin
          failures++; $display("FAIL: row %0d lane %0d", r, c);
        end
      end
    end
  endtask

  initial begin
    start = 0; first = 0; y_valid = 0; y_in = '0; rd_en = 0; rd_addr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    pass(1, D); pass(0, D); pass(0, 5);
    readback(D);
    pass(1, 6);
    readback(6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
