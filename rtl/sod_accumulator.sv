// sod_accumulator: adds each PE-array output vector to the previous output
// kept for the same output row, completing a matrix product that is split
// over several weight tiles.
//
// DEPTH rows of N_COLS lanes of PW bits. start clears the row counter; the
// k-th valid output vector after start goes to row k. With first = 1 (latched
// at start) the row is overwritten, otherwise y_in is added to it (wrap-around
// two's complement). count tells how many vectors have arrived in this pass.
// A registered read port (rd_en/rd_addr, data one cycle later) serves the
// write-back to the global buffer. One read-modify-write per cycle, so the
// accumulator keeps up with one PE-array output every cycle.
// Adding the array output to the previous output is the published function;
// the row organisation, depth and counter are this design's choices.
module sod_accumulator #(
  parameter int N_COLS = sod_pkg::N,
  parameter int PW     = sod_pkg::PSUM_W,
  parameter int DEPTH  = sod_pkg::ACC_DEPTH,
  localparam int AW    = $clog2(DEPTH),
  localparam int CW    = $clog2(DEPTH + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic                      first,
  input  logic                      y_valid,
  input  logic [N_COLS-1:0][PW-1:0] y_in,
  output logic [CW-1:0]             count,
  input  logic                      rd_en,
  input  logic [AW-1:0]             rd_addr,
  output logic [N_COLS-1:0][PW-1:0] rd_data
);
  logic [N_COLS-1:0][PW-1:0] mem [DEPTH];
  logic                      first_q;
  logic [N_COLS-1:0][PW-1:0] old_row, new_row;

  assign old_row = mem[count[AW-1:0]];
  always_comb begin
    for (int c = 0; c < N_COLS; c++)
      new_row[c] = (first_q ? '0 : old_row[c]) + y_in[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count   <= '0;
      first_q <= 1'b1;
    end else if (start) begin
      count   <= '0;
      first_q <= first;
    end else if (y_valid) begin
      count   <= count + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!start && y_valid) mem[count[AW-1:0]] <= new_row;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  assert property (@(posedge clk) disable iff (!rst_n) y_valid |-> count < CW'(DEPTH))
    else $error("accumulator overflow");
endmodule
