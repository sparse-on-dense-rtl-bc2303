// tb_sod_pe: self-checking test of one processing element.
// Loads weights through the shadow register, checks that only w_commit makes
// them active, and checks psum_out = psum_in + x_in * w (32-bit wrap) and the
// one-cycle forwarding of x and of the shadow weight, over random values.
module tb_sod_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic w_shift, w_commit;
  logic signed [15:0] w_in, w_out, x_in, x_out;
  logic signed [31:0] psum_in, psum_out;

  sod_pe dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int act_w, sh_w, exp_p, xv, pv;
    w_shift = 0; w_commit = 0; w_in = 0; x_in = 0; psum_in = 0;
    act_w = 0; sh_w = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      w_shift  = ($urandom % 4) == 0;
      w_commit = ($urandom % 5) == 0;
      w_in     = 16'($urandom);
      xv       = int'($signed(16'($urandom)));
      pv       = int'($urandom);
      x_in     = 16'(xv);
      psum_in  = pv;
      exp_p    = pv + xv * act_w;
      @(posedge clk);
      // update model after the edge
      if (w_commit) act_w = sh_w;
      if (w_shift)  sh_w  = int'(w_in);
      #1;
      chk(psum_out == 32'(exp_p), $sformatf("psum %0d exp %0d", psum_out, exp_p));
      chk(x_out == 16'(xv), "x forward");
      chk(w_out == 16'(sh_w), "shadow forward");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
