// tb_sod_pointer_buffer: loads random pointer words (full 1024-bit width,
// 128 pointers) and checks ptr_lo/ptr_hi for every column, and that the
// contents hold while load is low.
module tb_sod_pointer_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic load;
  logic [1023:0] word, ref_w;
  logic [6:0] col;
  logic [7:0] ptr_lo, ptr_hi;
  sod_pointer_buffer dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    load = 0; word = '0; col = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 8; it++) begin
      @(negedge clk);
      for (int i = 0; i < 32; i++) word[i*32 +: 32] = $urandom;
      ref_w = word; load = 1;
      @(negedge clk);
      load = 0; word = ~word;  // must be ignored
      for (int j = 0; j < 127; j++) begin
        col = 7'(j);
        #1;
        checks++;
        if (ptr_lo != ref_w[j*8 +: 8] || ptr_hi != ref_w[(j+1)*8 +: 8]) begin
          failures++; $display("FAIL: col %0d lo %h hi %h", j, ptr_lo, ptr_hi);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
