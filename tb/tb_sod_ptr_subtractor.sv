// tb_sod_ptr_subtractor: exhaustive test of the pointer subtractor, including
// pointers that wrap around at 8 bits.
module tb_sod_ptr_subtractor;
  int checks = 0, failures = 0;
  logic [7:0] ptr_lo, ptr_hi, nnz;
  sod_ptr_subtractor dut (.*);
  initial begin
    for (int a = 0; a < 256; a++)
      for (int b = 0; b < 256; b++) begin
        ptr_lo = 8'(a); ptr_hi = 8'(b);
        #1;
        checks++;
        if (int'(nnz) != ((b - a + 256) % 256)) begin
          failures++;
          if (failures < 10) $display("FAIL: %0d - %0d gave %0d", b, a, nnz);
        end
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
