// sod_pointer_buffer: pointer buffer of the decompression unit.
//
// Holds the CSC column pointers of one compressed block. load captures a whole
// global-buffer word, which packs NP = W / PTR_W pointers (pointer p in bits
// [p*PTR_W +: PTR_W]), so a block has up to NP-1 columns. For the current
// column col the buffer gives ptr_lo = pointer[col] and ptr_hi =
// pointer[col+1], combinationally. Fetching the pointers first and
// subtracting neighbours follows the published decompression steps; the
// one-word packing is this design's choice.
module sod_pointer_buffer #(
  parameter int W     = sod_pkg::GB_W,
  parameter int PTR_W = sod_pkg::PTR_W,
  localparam int NP   = W / PTR_W,
  localparam int CW   = $clog2(NP)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [W-1:0]     word,
  input  logic [CW-1:0]    col,
  output logic [PTR_W-1:0] ptr_lo,
  output logic [PTR_W-1:0] ptr_hi
);
  logic [PTR_W-1:0] ptrs [NP];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NP; p++) ptrs[p] <= '0;
    end else if (load) begin
      for (int p = 0; p < NP; p++) ptrs[p] <= word[p*PTR_W +: PTR_W];
    end
  end

  assign ptr_lo = ptrs[col];
  assign ptr_hi = (col == CW'(NP - 1)) ? ptrs[col] : ptrs[col + 1'b1];
endmodule
