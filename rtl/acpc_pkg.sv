// acpc_pkg: geometry, types and the two coding functions of the adaptive cross
// parity check (ACPC) code.
//
// A code block is two matrices, M1 and M2, each of ROWS = 9 rows. In each
// matrix row 0 holds cross (diagonal) parity bits, rows 1..7 hold data and
// row 8 holds vertical (column) parity bits. Each matrix has COLS = 17 data
// columns plus EXT zero-filled columns on the right, so a row is
// W = COLS + EXT bits wide. The stacked drawing of the code places M1 rows
// 1..7 above M2 rows 7..1, so a diagonal runs through both matrices:
//
//   positive slope, index m:  M1(0)(m) = XOR_{t=1..7} M1(t)(m-t)
//                                      ^ XOR_{t=0..7} M2(t)(m+t-15)
//   negative slope, index m:  M2(0)(m) = XOR_{t=1..7} M2(t)(m-t)
//                                      ^ XOR_{t=0..7} M1(t)(m+t-15)
//   vertical, column m:       Mx(8)(m) = XOR_{t=0..7} Mx(t)(m)
//
// A bit whose column index falls outside 0..W-1 counts as 0. The t = 0 term of
// the other matrix is that matrix's own cross parity bit 15 columns to the
// left, so the two cross parity rows are computed together from column 0
// upwards. These equations, the 9 x 17 matrix size and the offset 15 follow
// the published code; the EXT width (7) is this design's choice: it is the
// smallest width that puts every data bit on at least one diagonal.
//
// Codeword layout: cw[mat][row][col], mat 0 = M1, mat 1 = M2.
// Data layout:     dat[mat][row-1][col], rows 1..7, data columns only.
package acpc_pkg;

  localparam int unsigned ROWS  = 9;              // rows per matrix (0..8)
  localparam int unsigned DROWS = ROWS - 2;       // data rows per matrix (1..7)
  localparam int unsigned COLS  = 17;             // data columns
  localparam int unsigned EXT   = 7;              // zero-filled extra columns
  localparam int unsigned W     = COLS + EXT;     // stored row width
  localparam int unsigned OFS   = 2 * (ROWS - 1) - 1;  // 15: diagonal offset
  localparam int unsigned BLK_ROWS = 2 * DROWS;   // data rows per code block (14)

  typedef logic [COLS-1:0]                 row_t;    // one data row / bus word
  typedef logic [1:0][DROWS-1:0][COLS-1:0] data_t;   // data of one block
  typedef logic [1:0][ROWS-1:0][W-1:0]     cw_t;     // full codeword
  typedef logic [1:0][1:0][W-1:0]          fec_t;    // [mat][0:cross,1:vert]

  typedef enum logic { SLOPE_POS = 1'b0, SLOPE_NEG = 1'b1 } slope_e;

  // Bit (mat,row,col) of a codeword, 0 outside the stored columns.
  function automatic logic cw_bit(input cw_t cw, input int mat, input int row,
                                  input int col);
    if (col < 0 || col >= int'(W)) return 1'b0;
    return cw[mat][row][col];
  endfunction

  // Place data rows into a codeword with zero check rows and zero extra columns.
  function automatic cw_t place_data(input data_t d);
    cw_t cw = '0;
    for (int x = 0; x < 2; x++)
      for (int r = 0; r < int'(DROWS); r++)
        cw[x][r+1][COLS-1:0] = d[x][r];
    return cw;
  endfunction

  function automatic data_t extract_data(input cw_t cw);
    data_t d;
    for (int x = 0; x < 2; x++)
      for (int r = 0; r < int'(DROWS); r++)
        d[x][r] = cw[x][r+1][COLS-1:0];
    return d;
  endfunction

  // Encoder: fill rows 0 and 8 of both matrices.
  function automatic cw_t encode(input data_t d);
    cw_t cw = place_data(d);
    for (int m = 0; m < int'(W); m++) begin
      for (int a = 0; a < 2; a++) begin
        logic p = 1'b0;
        for (int t = 1; t <= int'(DROWS); t++) p ^= cw_bit(cw, a, t, m - t);
        for (int t = 0; t <= int'(DROWS); t++)
          p ^= cw_bit(cw, 1 - a, t, m + t - int'(OFS));
        cw[a][0][m] = p;
      end
    end
    for (int a = 0; a < 2; a++)
      for (int m = 0; m < int'(W); m++) begin
        logic p = 1'b0;
        for (int t = 0; t <= int'(DROWS); t++) p ^= cw[a][t][m];
        cw[a][ROWS-1][m] = p;
      end
    return cw;
  endfunction

  // Diagonal syndrome of matrix a (a = 0: positive slope, a = 1: negative).
  function automatic logic [W-1:0] diag_syndrome(input cw_t cw, input int a);
    logic [W-1:0] s;
    for (int m = 0; m < int'(W); m++) begin
      logic p = 1'b0;
      for (int t = 0; t <= int'(DROWS); t++)
        p ^= cw_bit(cw, a, t, m - t) ^ cw_bit(cw, 1 - a, t, m + t - int'(OFS));
      s[m] = p;
    end
    return s;
  endfunction

  // Vertical syndrome of matrix a: parity of rows 0..8 of each column.
  function automatic logic [W-1:0] vert_syndrome(input cw_t cw, input int a);
    logic [W-1:0] s;
    for (int m = 0; m < int'(W); m++) begin
      logic p = 1'b0;
      for (int t = 0; t < int'(ROWS); t++) p ^= cw[a][t][m];
      s[m] = p;
    end
    return s;
  endfunction

  // FEC rows of a codeword and the reverse.
  function automatic fec_t get_fec(input cw_t cw);
    fec_t f;
    for (int a = 0; a < 2; a++) begin
      f[a][0] = cw[a][0];
      f[a][1] = cw[a][ROWS-1];
    end
    return f;
  endfunction

  function automatic cw_t join_fec(input data_t d, input fec_t f);
    cw_t cw = place_data(d);
    for (int a = 0; a < 2; a++) begin
      cw[a][0]      = f[a][0];
      cw[a][ROWS-1] = f[a][1];
    end
    return cw;
  endfunction

endpackage
