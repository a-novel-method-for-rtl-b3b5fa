// tb_acpc_ref_pkg: reference model of the ACPC code for the testbenches.
//
// Computed differently from the RTL: instead of summing the bits of each
// diagonal, every data bit is scattered into the check bits of the diagonals
// and column that pass through it. A bit of matrix a at row t, column c lies on
// its own matrix's diagonal c+t and on the other matrix's diagonal c-t+15;
// a cross parity bit (row 0) of matrix a at column c therefore feeds diagonal
// c+15 of the other matrix, which is resolved by visiting columns in order.
package tb_acpc_ref_pkg;
  import acpc_pkg::*;

  function automatic cw_t ref_encode(input data_t d);
    cw_t cw = '0;
    logic [1:0][W-1:0] chk = '0;
    for (int a = 0; a < 2; a++)
      for (int t = 1; t <= int'(DROWS); t++)
        for (int c = 0; c < int'(COLS); c++) begin
          logic b = d[a][t-1][c];
          cw[a][t][c] = b;
          if (c + t < int'(W)) chk[a][c+t] ^= b;
          if (c - t + int'(OFS) >= 0 && c - t + int'(OFS) < int'(W))
            chk[1-a][c-t+int'(OFS)] ^= b;
        end
    for (int c = 0; c < int'(W); c++)
      for (int a = 0; a < 2; a++) begin
        cw[a][0][c] = chk[a][c];
        if (c + int'(OFS) < int'(W)) chk[1-a][c+int'(OFS)] ^= chk[a][c];
      end
    for (int a = 0; a < 2; a++)
      for (int c = 0; c < int'(W); c++) begin
        logic p = 1'b0;
        for (int t = 0; t < int'(ROWS) - 1; t++) p ^= cw[a][t][c];
        cw[a][ROWS-1][c] = p;
      end
    return cw;
  endfunction

  function automatic data_t rand_data();
    data_t d;
    for (int a = 0; a < 2; a++)
      for (int r = 0; r < int'(DROWS); r++) d[a][r] = COLS'($urandom);
    return d;
  endfunction

endpackage
