// tb_sod_pe_array: 6 x 5 array. Shifts in random weights (the vector shifted
// m-th ends in row 5-m), commits them, streams 40 random input vectors with
// random bubbles and checks each output vector against sum_r x[r]*W[r][c], the
// output order, and the latency N_ROWS + N_COLS - 1 from input to output.
// Repeats with a second weight set to check that commit switches weights.
module tb_sod_pe_array;
  localparam int R = 6, C = 5, LAT = R + C - 1, T = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic w_shift, w_commit, x_valid, y_valid;
  logic [C-1:0][15:0] w_in;
  logic [R-1:0][15:0] x_in;
  logic [C-1:0][31:0] y_out;
  sod_pe_array #(.N_ROWS(R), .N_COLS(C), .DW(16), .PW(32)) dut (.*);

  int wm [R][C];
  int xs [T][R];
  int in_cycle [T];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got;
  always @(posedge clk) begin
    if (rst_n && y_valid) begin
      int e;
      for (int c = 0; c < C; c++) begin
        e = 0;
        for (int r = 0; r < R; r++) e += xs[got][r] * wm[r][c];
        checks++;
        if (y_out[c] != 32'(e)) begin
          failures++; $display("FAIL: vec %0d col %0d got %0d exp %0d", got, c, $signed(y_out[c]), e);
        end
      end
      checks++;
      if (cyc - in_cycle[got] != LAT) begin
        failures++; $display("FAIL: latency %0d", cyc - in_cycle[got]);
      end
      got++;
    end
  end

  initial begin
    w_shift = 0; w_commit = 0; x_valid = 0; w_in = '0; x_in = '0; got = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      got = 0;
      for (int m = 0; m < R; m++) begin
        @(negedge clk);
        w_shift = 1;
        for (int c = 0; c < C; c++) begin
          wm[R-1-m][c] = int'($signed(16'($urandom)));
          w_in[c] = 16'(wm[R-1-m][c]);
        end
      end
      @(negedge clk); w_shift = 0; w_commit = 1;
      @(negedge clk); w_commit = 0;
      for (int t = 0; t < T; ) begin
        @(negedge clk);
        x_valid = ($urandom % 4) != 0;
        if (x_valid) begin
          for (int r = 0; r < R; r++) begin
            xs[t][r] = int'($signed(16'($urandom)));
            x_in[r] = 16'(xs[t][r]);
          end
          in_cycle[t] = cyc;
          t++;
        end else x_in = '0;
      end
      @(negedge clk); x_valid = 0;
      repeat (LAT + 3) @(posedge clk);
      checks++;
      if (got != T) begin failures++; $display("FAIL: %0d outputs", got); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
