// tb_sod_global_buffer: the full 2 MB buffer (16384 x 1024 bits, 2 read
// ports). Writes random words to random addresses, keeps a model, and reads
// them back on both ports with one-cycle latency, including read-during-write
// of the same address (old word expected) and the first and last address.
module tb_sod_global_buffer;
  localparam int W = 1024, D = 16384;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [1:0] rd_en;
  logic [1:0][15:0] rd_addr;
  logic [1:0][W-1:0] rd_data;
  logic wr_en;
  logic [15:0] wr_addr;
  logic [W-1:0] wr_data;
  sod_global_buffer dut (.*);
  logic [W-1:0] model [int];
  int addrs [$];

  function automatic logic [W-1:0] rnd_word();
    logic [W-1:0] w;
    for (int i = 0; i < W/32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] e0, e1;
    rd_en = 0; rd_addr = '0; wr_en = 0; wr_addr = 0; wr_data = '0;
    addrs.push_back(0); addrs.push_back(D-1);
    for (int i = 0; i < 300; i++) addrs.push_back($urandom % D);
    foreach (addrs[i]) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 16'(addrs[i]); wr_data = rnd_word();
      model[addrs[i]] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 600; i++) begin
      int a0, a1;
      @(negedge clk);
      a0 = addrs[$urandom % addrs.size()];
      a1 = addrs[$urandom % addrs.size()];
      rd_en = 2'b11; rd_addr[0] = 16'(a0); rd_addr[1] = 16'(a1);
      e0 = model[a0]; e1 = model[a1];
      // overwrite a0 in the same cycle: the read must see the old word
      wr_en = (i % 3) == 0; wr_addr = 16'(a0); wr_data = rnd_word();
      if (wr_en) model[a0] = wr_data;
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      checks += 2;
      if (rd_data[0] !== e0) begin failures++; $display("FAIL: port0 addr %0d", a0); end
      if (rd_data[1] !== e1 && !(a1 == a0 && (i % 3) == 0)) begin failures++; $display("FAIL: port1 addr %0d", a1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
