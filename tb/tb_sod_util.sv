// tb_sod_util: testbench helpers for the Sparse-on-Dense accelerator.
//
// Builds global-buffer images of operands the way the hardware expects them:
//  - pack_csc: a matrix given column by column (mat[col][row], 0 = zero) as a
//    CSC block: word 0 holds the 8-bit column pointers (pointer j in bits
//    [8j +: 8], starting at ptr0 and wrapping at 256), the next words hold the
//    non-zero entries {value[15:0], row index[7:0]} packed W/24 to a word in
//    column order, with no gaps between columns;
//  - pack_dense: one dense vector, element p in bits [16p +: 16].
// Also a random sparse matrix generator with a density in percent.
package tb_sod_util;
  typedef logic [1023:0] word_t;

  function automatic void pack_csc(input int mat[][], input int nrows, input int ncols,
                                   input int W, input int ptr0, output word_t words[$]);
    int L;
    int ptr, fill;
    word_t pw, cur;
    L = W / 24;
    words.delete();
    pw  = '0;
    ptr = ptr0;
    pw[7:0] = 8'(ptr);
    for (int j = 0; j < ncols; j++) begin
      for (int i = 0; i < nrows; i++) if (mat[j][i] != 0) ptr++;
      pw[(j+1)*8 +: 8] = 8'(ptr);
    end
    words.push_back(pw);
    cur  = '0;
    fill = 0;
    for (int j = 0; j < ncols; j++)
      for (int i = 0; i < nrows; i++)
        if (mat[j][i] != 0) begin
          cur[fill*24 +: 24] = {16'(mat[j][i]), 8'(i)};
          fill++;
          if (fill == L) begin
            words.push_back(cur);
            cur  = '0;
            fill = 0;
          end
        end
    if (fill > 0) words.push_back(cur);
  endfunction

  function automatic word_t pack_dense(input int vec[], input int n);
    word_t w;
    w = '0;
    for (int p = 0; p < n; p++) w[p*16 +: 16] = 16'(vec[p]);
    return w;
  endfunction

  // random non-zero 16-bit signed value
  function automatic int rnd_val();
    int v;
    do v = int'($signed(16'($urandom))); while (v == 0);
    return v;
  endfunction

  // mat[col][row] with roughly density_pct percent non-zeros
  function automatic void rnd_matrix(output int mat[][], input int nrows, input int ncols,
                                     input int density_pct);
    mat = new[ncols];
    for (int j = 0; j < ncols; j++) begin
      mat[j] = new[nrows];
      for (int i = 0; i < nrows; i++)
        mat[j][i] = (($urandom % 100) < density_pct) ? rnd_val() : 0;
    end
  endfunction
endpackage
