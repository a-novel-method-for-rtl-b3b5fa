// acpc_encoder: ACPC encoder for one code block (two 9 x 17 matrices).
//
// Computes the forward error correction (FEC) rows of a block: row 0 of M1
// (positive-slope cross parity), row 0 of M2 (negative-slope cross parity) and
// row 8 of both matrices (vertical parity), with the equations in acpc_pkg.
// All diagonals and columns are computed in parallel in one clock cycle.
//
// Timing (signal names follow the published timing diagram):
//   cycle 0  enc_start = 1 with data_in valid; enc_done falls on the next edge
//   cycle 1  par_check_start = 1: data_in is registered and the parity computed
//   cycle 2  enc_data holds the codeword, fec the four check rows, and
//            enc_done is back at 1 (it stays 1 until the next enc_start).
// enc_start must be held until enc_done falls or be a single-cycle pulse; the
// data are sampled in the cycle of enc_start. The published diagram shows
// parity checking starting in the cycle after Enc_start and Enc_Done low while
// encoding; the exact cycle counts are this design's choice. Reset is
// asynchronous and active low.
module acpc_encoder
  import acpc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  enc_start,
  input  data_t data_in,
  output logic  par_check_start,
  output logic  enc_done,
  output cw_t   enc_data,
  output fec_t  fec
);

  data_t data_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      par_check_start <= 1'b0;
      enc_done        <= 1'b1;
      data_q          <= '0;
      enc_data        <= '0;
    end else begin
      par_check_start <= 1'b0;
      if (enc_start && enc_done && !par_check_start) begin
        data_q          <= data_in;
        par_check_start <= 1'b1;
        enc_done        <= 1'b0;
      end
      if (par_check_start) begin
        enc_data <= encode(data_q);
        enc_done <= 1'b1;
      end
    end
  end

  assign fec = get_fec(enc_data);

endmodule
