// acpc_syndrome: combinational syndrome unit of the ACPC decoder.
//
// From a read-back codeword it forms, in parallel, the four syndrome vectors
// of the code: xd_pos[m] (positive-slope diagonal m, checked against row 0 of
// M1), xd_neg[m] (negative-slope diagonal m, checked against row 0 of M2) and
// xv_m1[m], xv_m2[m] (parity of rows 0..8 of column m in M1 and M2). A
// non-zero bit marks a diagonal or column that holds an odd number of errors.
// The equations follow the published code (see acpc_pkg); the unit is purely
// combinational and has no clock.
module acpc_syndrome
  import acpc_pkg::*;
(
  input  cw_t          cw,
  output logic [W-1:0] xd_pos,
  output logic [W-1:0] xd_neg,
  output logic [W-1:0] xv_m1,
  output logic [W-1:0] xv_m2
);

  always_comb begin
    xd_pos = diag_syndrome(cw, 0);
    xd_neg = diag_syndrome(cw, 1);
    xv_m1  = vert_syndrome(cw, 0);
    xv_m2  = vert_syndrome(cw, 1);
  end

endmodule
