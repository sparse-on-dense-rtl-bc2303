// sod_element_select: element selection unit of the decompression unit.
//
// Decides how many entries at the front of the non-zero buffer belong to the
// current column: k = min(rem, avail, L), where rem is the number of the
// column's non-zeros still missing (from the pointer subtractor) and avail the
// entries in the buffer. sel marks entries 0..k-1 for the dense mapping unit;
// col_done says the column is complete this cycle (k == rem, including empty
// columns with rem = 0). With en low nothing is taken. Combinational.
// Selecting by the pointer difference follows the published design; the
// per-cycle limit of L entries is this design's choice, so a column with more
// than L non-zeros takes several cycles.
module sod_element_select #(
  parameter int L   = sod_pkg::NZ_L,
  parameter int RW  = sod_pkg::PTR_W,
  parameter int CW  = $clog2(3 * L + 1)
) (
  input  logic          en,
  input  logic [RW-1:0] rem,
  input  logic [CW-1:0] avail,
  output logic [CW-1:0] k,
  output logic [L-1:0]  sel,
  output logic          col_done
);
  int unsigned m;
  always_comb begin
    m = int'(rem);
    if (int'(avail) < m) m = int'(avail);
    if (L < m)           m = L;
    if (!en)             m = 0;
    k        = CW'(m);
    col_done = en && (m == int'(rem));
    for (int e = 0; e < L; e++) sel[e] = (e < m);
  end
endmodule
