// slave_interface: command and data port of the proposed ICAP block.
//
// The master (a processor or a light-weight ICAP controller) starts a
// configuration with icap_start, naming the first partition (pr_index) and the
// bit length of the partial bit file, then streams the file as 17-bit rows
// (one matrix row each) on s_valid/s_ready/s_data. The interface counts the
// bits received, marks the row that reaches the bit length with m_last and
// refuses rows while no transfer is open. When the ACPC block reports that the
// file is written (cfg_done), it pulses icap_done to the master. A request
// from the ACPC block to download a partition again (redownload_valid) is held
// on redownload_req/redownload_pr until the master starts a transfer.
//
// ICAP_start, bit length and ICAP_done are the published signals; the
// partition index, the row-wide stream, its valid/ready handshake and the
// sticky re-download request are this design's choices. A bit length of zero
// is treated as one row. icap_start is ignored while a transfer is open.
module slave_interface
  import acpc_pkg::*;
#(
  parameter int unsigned PRW = 2,
  parameter int unsigned LW  = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  // master side
  input  logic           icap_start,
  input  logic [PRW-1:0] pr_index,
  input  logic [LW-1:0]  bit_length,
  input  logic           s_valid,
  output logic           s_ready,
  input  row_t           s_data,
  output logic           icap_done,
  output logic           redownload_req,
  output logic [PRW-1:0] redownload_pr,
  // ACPC side
  output logic           cfg_start,
  output logic [PRW-1:0] cfg_pr,
  output logic           m_valid,
  input  logic           m_ready,
  output row_t           m_data,
  output logic           m_last,
  input  logic           cfg_done,
  input  logic           redownload_valid,
  input  logic [PRW-1:0] redownload_idx
);

  logic          open_q;       // rows are being accepted
  logic          wait_done_q;  // all rows passed, waiting for cfg_done
  logic [LW-1:0] len_q, got_q;

  assign s_ready = open_q && m_ready;
  assign m_valid = open_q && s_valid;
  assign m_data  = s_data;
  assign m_last  = (32'(got_q) + COLS >= 32'(len_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q         <= 1'b0;
      wait_done_q    <= 1'b0;
      len_q          <= '0;
      got_q          <= '0;
      cfg_start      <= 1'b0;
      cfg_pr         <= '0;
      icap_done      <= 1'b0;
      redownload_req <= 1'b0;
      redownload_pr  <= '0;
    end else begin
      cfg_start <= 1'b0;
      icap_done <= 1'b0;
      if (icap_start && !open_q && !wait_done_q) begin
        open_q         <= 1'b1;
        len_q          <= bit_length;
        got_q          <= '0;
        cfg_start      <= 1'b1;
        cfg_pr         <= pr_index;
        redownload_req <= 1'b0;
      end
      if (m_valid && m_ready) begin
        got_q <= got_q + LW'(COLS);
        if (m_last) begin
          open_q      <= 1'b0;
          wait_done_q <= 1'b1;
        end
      end
      if (wait_done_q && cfg_done) begin
        wait_done_q <= 1'b0;
        icap_done   <= 1'b1;
      end
      if (redownload_valid) begin
        redownload_req <= 1'b1;
        redownload_pr  <= redownload_idx;
      end
    end
  end

endmodule
