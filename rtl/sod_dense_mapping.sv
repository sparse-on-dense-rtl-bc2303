// sod_dense_mapping: dense mapping unit of the decompression unit.
//
// Writes each selected non-zero value into the dense vector at the position
// given by its index (the row of the original matrix); all other positions
// keep the value they had in cur, which the dense format buffer clears to zero
// at the start of each column. Indices of N or more are ignored.
// Combinational: N x L index comparators. The scatter by index follows the
// published design.
module sod_dense_mapping
#(
  parameter int N  = sod_pkg::N,
  parameter int L  = sod_pkg::NZ_L,
  parameter int DW = sod_pkg::DATA_W
) (
  input  sod_pkg::nz_entry_t [L-1:0]     ent,
  input  logic [L-1:0]          sel,
  input  logic [N-1:0][DW-1:0]  cur,
  output logic [N-1:0][DW-1:0]  nxt
);
  always_comb begin
    for (int p = 0; p < N; p++) begin
      nxt[p] = cur[p];
      for (int e = 0; e < L; e++)
        if (sel[e] && int'(ent[e].idx) == p) nxt[p] = DW'(ent[e].val);
    end
  end
endmodule
