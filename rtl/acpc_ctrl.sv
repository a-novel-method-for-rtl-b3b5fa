// acpc_ctrl: the ACPC block of the proposed ICAP block.
//
// Sits between the slave interface and the HWICAP buffers and runs the two
// phases of the published workflow.
//
// Configuration phase: rows of a partial bit file arrive from the slave
// interface. Every 14 rows (rows 1..7 of M1 then rows 1..7 of M2; a short last
// block is filled with zero rows) form one code block. The block is encoded
// by acpc_encoder, its four check rows (FEC) are kept in a register file inside
// this block (the static, error-free region) and its 14 data rows are written
// to configuration memory through the TX FIFO. Only the data rows are stored
// in configuration memory. When the last row is written cfg_done pulses.
//
// Run phase (scrubbing): every SCRUB_INTERVAL idle cycles, or at once when
// scrub_now is pulsed, every configured partition is read back block by block
// through the RX FIFO. Each block is joined with its stored FEC, the logged
// earlier corrections are forced into it (acpc_fix_history) and it is decoded
// by acpc_decoder; each correction is logged. The corrected blocks of a
// partition are buffered. At the end of a partition:
//   - if a block was uncorrectable, redownload_valid pulses with the partition
//     index so that the master sends the original pr_i again;
//   - else if anything was corrected, the corrected partition is written back;
//   - else nothing is written.
// fault_map records which partitions held faults in the last pass; it and
// scrub_done are updated once all write-backs have left the HWICAP buffers.
//
// Address map: configuration row address = block * 14 + row, block =
// partition * BLK_PER_PR + block-in-partition. The partition count, the
// block count per partition, the scrub interval, the per-partition write-back
// (the published text writes faulty partitions back once the whole scan is
// done) and the row-wide data path are this design's choices.
module acpc_ctrl
  import acpc_pkg::*;
#(
  parameter int unsigned N_PR           = 4,
  parameter int unsigned BLK_PER_PR     = 2,
  parameter int unsigned SCRUB_INTERVAL = 1000,
  parameter int unsigned HIST_DEPTH     = 8,
  localparam int unsigned N_BLK = N_PR * BLK_PER_PR,
  localparam int unsigned PRW   = (N_PR > 1) ? $clog2(N_PR) : 1,
  localparam int unsigned BPW   = (BLK_PER_PR > 1) ? $clog2(BLK_PER_PR) : 1,
  localparam int unsigned BLKW  = (N_BLK > 1) ? $clog2(N_BLK) : 1,
  localparam int unsigned AW    = $clog2(N_BLK * BLK_ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  // from / to slave interface
  input  logic            cfg_start,
  input  logic [PRW-1:0]  cfg_pr,
  input  logic            m_valid,
  output logic            m_ready,
  input  row_t            m_data,
  input  logic            m_last,
  output logic            cfg_done,
  output logic            redownload_valid,
  output logic [PRW-1:0]  redownload_idx,
  // scrubbing control and status
  input  logic            scrub_en,
  input  logic            scrub_now,
  output logic            scrub_done,
  output logic [N_PR-1:0] fault_map,
  output logic [15:0]     corr_count,
  output logic [15:0]     hist_count,
  // to / from HWICAP
  output logic            tx_valid,
  input  logic            tx_ready,
  output logic [AW-1:0]   tx_addr,
  output row_t            tx_data,
  output logic            rd_req_valid,
  input  logic            rd_req_ready,
  output logic [AW-1:0]   rd_req_addr,
  output logic [AW-1:0]   rd_req_len,
  input  logic            rx_valid,
  output logic            rx_ready,
  input  row_t            rx_data,
  input  logic            icap_idle,
  // decoder status, as in the published timing diagram
  output logic            enc_start,
  output logic            par_check_start,
  output logic            enc_done,
  output logic            decode_start,
  output logic            dia_syn,
  output logic            syn_nonzero,
  output logic            varticle_syn,
  output logic            error_detect,
  output logic            error_correct,
  output logic            decode_done
);

  typedef enum logic [3:0] {
    C_IDLE, C_COLLECT, C_ENC, C_ENC_WAIT, C_WRITE, C_FLUSH,
    S_START, S_REQ, S_READ, S_DEC, S_DEC_WAIT, S_PR_END, S_WB, S_NEXT, S_FIN
  } state_e;

  state_e          state;
  data_t           dbuf;
  fec_t            fec_mem [N_BLK];
  logic [N_BLK-1:0] fec_valid;
  row_t            pbuf [BLK_PER_PR][BLK_ROWS];
  logic [3:0]      row;          // row within a block, 0..13
  logic [BLKW-1:0] blk;          // current block
  logic [PRW-1:0]  pr;           // current partition (scrub)
  logic [BPW-1:0]  bip;          // block in partition (scrub)
  logic            last_q;       // configuration stream ended
  logic            pr_dirty, pr_bad;
  logic [31:0]     timer;
  logic [N_PR-1:0] fmap_pass;

  // ---------------------------------------------------------------- encoder
  fec_t enc_fec;
  acpc_encoder u_enc (
    .clk, .rst_n, .enc_start, .data_in(dbuf), .par_check_start,
    .enc_done, .enc_data(), .fec(enc_fec)
  );
  assign enc_start = (state == C_ENC);

  // ---------------------------------------------------- history and decoder
  cw_t  joined, dec_in, dec_out;
  logic hist_changed, uncorrectable, dec_busy;
  logic [7:0] n_corr;
  logic       fix_mat;
  logic [3:0] fix_row;
  logic [4:0] fix_col;
  logic       clr_valid;

  assign joined = join_fec(dbuf, fec_mem[blk]);

  acpc_fix_history #(.DEPTH(HIST_DEPTH), .BLKW(BLKW)) u_hist (
    .clk, .rst_n,
    .log_valid(error_correct), .log_blk(blk), .log_mat(fix_mat),
    .log_row(fix_row), .log_col(fix_col),
    .log_val(~dec_out[fix_mat][fix_row][fix_col]),
    .clr_valid, .clr_blk(blk),
    .apply_blk(blk), .cw_in(joined), .cw_out(dec_in), .changed(hist_changed)
  );
  assign clr_valid = (state == C_ENC_WAIT) && enc_done && !par_check_start;

  assign decode_start = (state == S_DEC) || (state == S_DEC_WAIT);
  acpc_decoder u_dec (
    .clk, .rst_n, .decode_start, .cw_in(dec_in),
    .dia_syn, .syn_nonzero, .varticle_syn, .error_detect, .error_correct,
    .decode_done, .busy(dec_busy), .uncorrectable, .n_corr,
    .fix_mat, .fix_row, .fix_col, .cw_out(dec_out)
  );

  // ------------------------------------------------------------ data path
  // Block row r is row r+1 of M1 for r < 7, row r-6 of M2 otherwise.
  function automatic row_t blk_row(input data_t d, input logic [3:0] r);
    return (r < 4'(DROWS)) ? d[0][r] : d[1][r - 4'(DROWS)];
  endfunction

  function automatic logic [AW-1:0] row_addr(input logic [BLKW-1:0] b,
                                             input logic [3:0] r);
    return AW'(32'(b) * BLK_ROWS + 32'(r));
  endfunction

  logic [BLKW-1:0] scrub_blk;
  assign scrub_blk = BLKW'(32'(pr) * BLK_PER_PR + 32'(bip));

  assign m_ready      = (state == C_COLLECT);
  assign rx_ready     = (state == S_READ);
  assign rd_req_valid = (state == S_REQ);
  assign rd_req_addr  = row_addr(blk, 4'd0);
  assign rd_req_len   = AW'(BLK_ROWS);

  always_comb begin
    tx_valid = 1'b0;
    tx_addr  = '0;
    tx_data  = '0;
    if (state == C_WRITE) begin
      tx_valid = 1'b1;
      tx_addr  = row_addr(blk, row);
      tx_data  = blk_row(dbuf, row);
    end else if (state == S_WB) begin
      tx_valid = 1'b1;
      tx_addr  = row_addr(BLKW'(32'(pr) * BLK_PER_PR + 32'(bip)), row);
      tx_data  = pbuf[bip][row];
    end
  end

  localparam logic [3:0] LAST_ROW = 4'(BLK_ROWS - 1);
  localparam logic [BPW-1:0] LAST_BIP = BPW'(BLK_PER_PR - 1);
  localparam logic [PRW-1:0] LAST_PR  = PRW'(N_PR - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state            <= C_IDLE;
      dbuf             <= '0;
      fec_valid        <= '0;
      row              <= '0;
      blk              <= '0;
      pr               <= '0;
      bip              <= '0;
      last_q           <= 1'b0;
      pr_dirty         <= 1'b0;
      pr_bad           <= 1'b0;
      timer            <= '0;
      fmap_pass        <= '0;
      fault_map        <= '0;
      corr_count       <= '0;
      hist_count       <= '0;
      cfg_done         <= 1'b0;
      scrub_done       <= 1'b0;
      redownload_valid <= 1'b0;
      redownload_idx   <= '0;
      for (int i = 0; i < int'(N_BLK); i++) fec_mem[i] <= '0;
    end else begin
      cfg_done         <= 1'b0;
      scrub_done       <= 1'b0;
      redownload_valid <= 1'b0;
      unique case (state)
        // ------------------------------------------------ configuration
        C_IDLE: begin
          if (cfg_start) begin
            blk    <= BLKW'(32'(cfg_pr) * BLK_PER_PR);
            row    <= '0;
            dbuf   <= '0;
            last_q <= 1'b0;
            state  <= C_COLLECT;
          end else if (scrub_now || (scrub_en && timer >= SCRUB_INTERVAL - 1)) begin
            timer <= '0;
            state <= S_START;
          end else if (scrub_en) begin
            timer <= timer + 1;
          end
        end
        C_COLLECT: if (m_valid) begin
          if (row < 4'(DROWS)) dbuf[0][row] <= m_data;
          else                 dbuf[1][row - 4'(DROWS)] <= m_data;
          last_q <= m_last;
          if (m_last || row == LAST_ROW) state <= C_ENC;
          else                           row   <= row + 4'd1;
        end
        C_ENC: if (!enc_done) state <= C_ENC_WAIT;
        C_ENC_WAIT: if (enc_done && !par_check_start) begin
          fec_mem[blk]   <= enc_fec;
          fec_valid[blk] <= 1'b1;
          row            <= '0;
          state          <= C_WRITE;
        end
        C_WRITE: if (tx_ready) begin
          if (row == LAST_ROW) begin
            row  <= '0;
            dbuf <= '0;
            if (last_q || 32'(blk) == N_BLK - 1) state <= C_FLUSH;
            else begin
              blk   <= blk + 1'b1;
              state <= C_COLLECT;
            end
          end else row <= row + 4'd1;
        end
        C_FLUSH: if (icap_idle) begin
          cfg_done <= 1'b1;
          state    <= C_IDLE;
        end
        // ------------------------------------------------ scrubbing
        S_START: begin
          pr        <= '0;
          bip       <= '0;
          pr_dirty  <= 1'b0;
          pr_bad    <= 1'b0;
          fmap_pass <= '0;
          state     <= S_NEXT;
        end
        S_NEXT: begin
          // Select block (pr, bip); skip blocks never configured.
          blk <= scrub_blk;
          row <= '0;
          if (fec_valid[scrub_blk]) state <= S_REQ;
          else begin
            for (int r = 0; r < int'(BLK_ROWS); r++) pbuf[bip][r] <= '0;
            state <= S_PR_END;
            if (bip != LAST_BIP) begin
              bip   <= bip + 1'b1;
              state <= S_NEXT;
            end
          end
        end
        S_REQ: if (rd_req_ready) state <= S_READ;
        S_READ: if (rx_valid) begin
          if (row < 4'(DROWS)) dbuf[0][row] <= rx_data;
          else                 dbuf[1][row - 4'(DROWS)] <= rx_data;
          if (row == LAST_ROW) state <= S_DEC;
          else                 row   <= row + 4'd1;
        end
        S_DEC: begin
          if (hist_changed) begin
            pr_dirty   <= 1'b1;
            hist_count <= hist_count + 16'd1;
          end
          state <= S_DEC_WAIT;
        end
        S_DEC_WAIT: if (decode_done && !dec_busy) begin
          for (int r = 0; r < int'(BLK_ROWS); r++)
            pbuf[bip][r] <= blk_row(extract_data(dec_out), 4'(r));
          if (n_corr != 0) pr_dirty <= 1'b1;
          if (uncorrectable) pr_bad <= 1'b1;
          corr_count <= corr_count + 16'(n_corr);
          if (bip != LAST_BIP) begin
            bip   <= bip + 1'b1;
            state <= S_NEXT;
          end else state <= S_PR_END;
        end
        S_PR_END: begin
          bip <= '0;
          row <= '0;
          if (pr_bad) begin
            redownload_valid <= 1'b1;
            redownload_idx   <= pr;
          end
          fmap_pass[pr] <= pr_dirty || pr_bad;
          if (pr_dirty && !pr_bad) state <= S_WB;
          else if (pr == LAST_PR) state <= S_FIN; else begin
            pr    <= pr + 1'b1;
            state <= S_NEXT;
          end
          pr_dirty <= 1'b0;
          pr_bad   <= 1'b0;
        end
        S_WB: if (tx_ready) begin
          if (row != LAST_ROW) row <= row + 4'd1;
          else begin
            row <= '0;
            if (bip != LAST_BIP) bip <= bip + 1'b1;
            else begin
              bip <= '0;
              if (pr == LAST_PR) state <= S_FIN;
              else begin
                pr    <= pr + 1'b1;
                state <= S_NEXT;
              end
            end
          end
        end
        // Report the pass once every write-back has reached the port.
        S_FIN: if (icap_idle) begin
          fault_map  <= fmap_pass;
          scrub_done <= 1'b1;
          state      <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
