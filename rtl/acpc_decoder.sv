// acpc_decoder: iterative, adaptive ACPC decoder for one code block.
//
// The read-back codeword is loaded on decode_start and held in a register.
// The acpc_syndrome unit recomputes all diagonal and vertical syndromes from
// that register every cycle. A controller then follows the published decoding
// steps:
//   DIA   (dia_syn = 1)  a diagonal pointer walks the positive-slope diagonals
//                        0..W-1, then the negative-slope ones, one per cycle,
//                        until it finds a non-zero diagonal syndrome;
//   VERT  (syn_nonzero = 1, varticle_syn = 0)
//                        a column pointer walks from column 0 to the right;
//                        at each column it looks at the bits where the faulty
//                        diagonal crosses that column (one in each matrix at
//                        most) and stops at the first whose matrix has a
//                        non-zero vertical syndrome there;
//   DETECT (error_detect = 1, one cycle) the position is reported on fix_*;
//   CORRECT (error_correct = 1, one cycle) the bit is inverted, and the search
//                        resumes on the same diagonal, since an odd number of
//                        errors may lie on it.
// A diagonal whose column search finds nothing is left and the walk moves on.
// After both slopes a new pass starts if the last pass corrected anything:
// a correction made along one slope can uncover an error along the other
// (the "adaptive" property of the code). Each correction clears one vertical
// syndrome bit, so the process always ends. decode_done then rises and stays
// high until the next rising edge of decode_start; uncorrectable = 1 if any syndrome is
// still non-zero, which the caller treats as "beyond correction capacity".
//
// Timing: one cycle per diagonal examined, one per column examined, two per
// correction. A block without errors takes 2*W + 2 cycles from decode_start
// to decode_done. Following the published diagram, varticle_syn is high
// except during the vertical search. The walk order, the restart rule and the
// uncorrectable flag are this design's choices where the text is silent.
module acpc_decoder
  import acpc_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         decode_start,
  input  cw_t          cw_in,
  output logic         dia_syn,
  output logic         syn_nonzero,
  output logic         varticle_syn,
  output logic         error_detect,
  output logic         error_correct,
  output logic         decode_done,
  output logic         busy,
  output logic         uncorrectable,
  output logic [7:0]   n_corr,
  output logic         fix_mat,          // 0: M1, 1: M2
  output logic [3:0]   fix_row,
  output logic [4:0]   fix_col,
  output cw_t          cw_out
);

  typedef enum logic [2:0] {
    S_IDLE, S_DIA, S_VERT, S_DETECT, S_CORRECT, S_DONE
  } state_e;

  state_e       state;
  cw_t          cw_q;
  slope_e       slope;
  logic [4:0]   dptr, cptr;
  logic         pass_fix;
  logic [W-1:0] xd_pos, xd_neg, xv_m1, xv_m2;

  acpc_syndrome u_syn (
    .cw(cw_q), .xd_pos(xd_pos), .xd_neg(xd_neg), .xv_m1(xv_m1), .xv_m2(xv_m2)
  );

  // Syndrome of the diagonal under the pointer.
  logic dsyn;
  assign dsyn = (slope == SLOPE_POS) ? xd_pos[dptr] : xd_neg[dptr];

  // Crossing points of diagonal dptr with column cptr: the own matrix (M1 for
  // the positive slope, M2 for the negative) at row dptr-cptr, the other
  // matrix at row cptr-dptr+15.
  int   own_row, oth_row;
  logic own_hit, oth_hit, own_mat;
  always_comb begin
    own_mat = (slope == SLOPE_NEG);
    own_row = int'(dptr) - int'(cptr);
    oth_row = int'(cptr) - int'(dptr) + int'(OFS);
    own_hit = (own_row >= 0) && (own_row <= int'(DROWS)) &&
              (own_mat ? xv_m2[cptr] : xv_m1[cptr]);
    oth_hit = (oth_row >= 0) && (oth_row <= int'(DROWS)) &&
              (own_mat ? xv_m1[cptr] : xv_m2[cptr]);
  end

  localparam logic [4:0] LAST = 5'(W - 1);

  // decode_start is level-sensitive in the published diagram (it stays high
  // through decoding), so decoding starts on its rising edge.
  logic decode_start_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) decode_start_q <= 1'b0;
    else        decode_start_q <= decode_start;


  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cw_q     <= '0;
      slope    <= SLOPE_POS;
      dptr     <= '0;
      cptr     <= '0;
      pass_fix <= 1'b0;
      n_corr   <= '0;
      fix_mat  <= 1'b0;
      fix_row  <= '0;
      fix_col  <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: if (decode_start && !decode_start_q) begin
          cw_q     <= cw_in;
          slope    <= SLOPE_POS;
          dptr     <= '0;
          pass_fix <= 1'b0;
          n_corr   <= '0;
          state    <= S_DIA;
        end
        S_DIA: begin
          if (dsyn) begin
            cptr  <= '0;
            state <= S_VERT;
          end else if (dptr != LAST) begin
            dptr <= dptr + 5'd1;
          end else if (slope == SLOPE_POS) begin
            slope <= SLOPE_NEG;
            dptr  <= '0;
          end else if (pass_fix) begin
            slope    <= SLOPE_POS;
            dptr     <= '0;
            pass_fix <= 1'b0;
          end else begin
            state <= S_DONE;
          end
        end
        S_VERT: begin
          if (own_hit || oth_hit) begin
            fix_mat <= own_hit ? own_mat : ~own_mat;
            fix_row <= own_hit ? 4'(own_row) : 4'(oth_row);
            fix_col <= cptr;
            state   <= S_DETECT;
          end else if (cptr != LAST) begin
            cptr <= cptr + 5'd1;
          end else begin
            // No column explains this diagonal: leave it and move on.
            state <= S_DIA;
            if (dptr != LAST) dptr <= dptr + 5'd1;
            else if (slope == SLOPE_POS) begin
              slope <= SLOPE_NEG;
              dptr  <= '0;
            end else if (pass_fix) begin
              slope    <= SLOPE_POS;
              dptr     <= '0;
              pass_fix <= 1'b0;
            end else state <= S_DONE;
          end
        end
        S_DETECT: state <= S_CORRECT;
        S_CORRECT: begin
          cw_q[fix_mat][fix_row][fix_col] <= ~cw_q[fix_mat][fix_row][fix_col];
          pass_fix <= 1'b1;
          if (n_corr != 8'hFF) n_corr <= n_corr + 8'd1;
          state <= S_DIA;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign dia_syn       = (state == S_DIA);
  assign syn_nonzero   = (state == S_VERT) || (state == S_DETECT) || (state == S_CORRECT);
  assign varticle_syn  = (state != S_VERT);
  assign error_detect  = (state == S_DETECT);
  assign error_correct = (state == S_CORRECT);
  assign decode_done   = (state == S_DONE);
  assign busy          = (state != S_IDLE) && (state != S_DONE);
  assign uncorrectable = decode_done && ((|xd_pos) || (|xd_neg) || (|xv_m1) || (|xv_m2));
  assign cw_out        = cw_q;

endmodule
