// sod_ptr_subtractor: the subtractor of the decompression unit.
//
// nnz = ptr_hi - ptr_lo, the number of non-zeros in one column (called the
// relative index in the published description). The subtraction is modulo
// 2^PTR_W, which is this design's choice: CSC pointers may wrap around at
// 8 bits and the difference is still exact as long as a column holds fewer
// than 2^PTR_W non-zeros (at most N = 64 here). Combinational.
module sod_ptr_subtractor #(
  parameter int PTR_W = sod_pkg::PTR_W
) (
  input  logic [PTR_W-1:0] ptr_lo,
  input  logic [PTR_W-1:0] ptr_hi,
  output logic [PTR_W-1:0] nnz
);
  assign nnz = ptr_hi - ptr_lo;
endmodule
