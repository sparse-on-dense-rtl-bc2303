// tb_sod_dense_format_buffer: drives random upd/col_done/clear sequences at
// N = 4 and checks build, the one-cycle out_valid pulse and out_vec against
// a model.
module tb_sod_dense_format_buffer;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear, upd, col_done, out_valid;
  logic [N-1:0][15:0] nxt_vec, build, out_vec;
  logic [N-1:0][15:0] m_build, m_out;
  logic m_valid;
  sod_dense_format_buffer #(.N(N), .DW(16)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    static int pulses = 0;
    clear = 0; upd = 0; col_done = 0; nxt_vec = '0;
    m_build = '0; m_out = '0; m_valid = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      clear = ($urandom % 10) == 0;
      upd = ($urandom % 3) != 0;
      col_done = ($urandom % 2) == 0;
      for (int p = 0; p < N; p++) nxt_vec[p] = 16'($urandom);
      @(posedge clk);
      m_valid = 0;
      if (clear) m_build = '0;
      else if (upd) begin
        if (col_done) begin m_out = nxt_vec; m_valid = 1; m_build = '0; end
        else m_build = nxt_vec;
      end
      #1;
      checks++;
      if (build != m_build || out_valid != m_valid || (m_valid && out_vec != m_out)) begin
        failures++; if (failures < 10) $display("FAIL: it %0d", it);
      end
      if (out_valid) pulses++;
    end
    checks++;
    if (pulses == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
