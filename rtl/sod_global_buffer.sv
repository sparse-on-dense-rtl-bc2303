// sod_global_buffer: the on-chip buffer holding weights, inputs and psums,
// dense or compressed (CSC), as W-bit words.
//
// The default size is the published 2 MB: 16384 words of 1024 bits, each word
// one dense 64 x 16-bit vector. It is written here as a plain array with NRD
// independent read ports and one write port; port count, word width and
// timing are this design's choices (a chip would build it from SRAM macros).
// Timing: rd_data[p] is valid the cycle after rd_en[p]; a read of the address
// being written in the same cycle returns the old word. Addresses are ADDR_W
// bits; only the low $clog2(DEPTH) bits are used.
module sod_global_buffer #(
  parameter int W      = sod_pkg::GB_W,
  parameter int DEPTH  = sod_pkg::GB_DEPTH,
  parameter int NRD    = 2,
  parameter int ADDR_W = sod_pkg::ADDR_W,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic                        clk,
  input  logic [NRD-1:0]              rd_en,
  input  logic [NRD-1:0][ADDR_W-1:0]  rd_addr,
  output logic [NRD-1:0][W-1:0]       rd_data,
  input  logic                        wr_en,
  input  logic [ADDR_W-1:0]           wr_addr,
  input  logic [W-1:0]                wr_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr[AW-1:0]] <= wr_data;
    for (int p = 0; p < NRD; p++)
      if (rd_en[p]) rd_data[p] <= mem[rd_addr[p][AW-1:0]];
  end
endmodule
