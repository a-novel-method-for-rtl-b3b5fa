// hwicap: buffered access to the internal configuration access port (ICAP).
//
// Holds the write FIFO (TX) and read FIFO (RX) of the published architecture
// and a sequencer that shares the single ICAP port between them. Words to be
// written enter the TX FIFO with their row address and are written to the
// port one per cycle. A read request (start row, number of rows) makes the
// sequencer read rows one per cycle into the RX FIFO, pausing while the RX
// FIFO has no room. Queued writes go first, so a read issued after writes
// sees the written data; reads and writes never overlap, as the port has one
// path for both.
//
// The vendor HWICAP core and the ICAP primitive are not described in the
// published design beyond this role. The port here is a simple row-addressed
// port: icap_csib = 0 selects it, icap_rdwrb = 1 reads and 0 writes the row at
// icap_addr; read data arrive on icap_o one cycle after the read strobe. Row
// width (17 bits, one matrix row), FIFO depth and the handshakes are this
// design's choices.
module hwicap
  import acpc_pkg::*;
#(
  parameter int unsigned AW    = 7,
  parameter int unsigned DEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // write side (from ACPC)
  input  logic          tx_valid,
  output logic          tx_ready,
  input  logic [AW-1:0] tx_addr,
  input  row_t          tx_data,
  // read request and read data (to ACPC)
  input  logic          rd_req_valid,
  output logic          rd_req_ready,
  input  logic [AW-1:0] rd_req_addr,
  input  logic [AW-1:0] rd_req_len,
  output logic          rx_valid,
  input  logic          rx_ready,
  output row_t          rx_data,
  output logic          idle,
  // ICAP port
  output logic          icap_csib,
  output logic          icap_rdwrb,
  output logic [AW-1:0] icap_addr,
  output row_t          icap_i,
  input  row_t          icap_o
);

  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic                 txf_valid, txf_pop;
  logic [AW+COLS-1:0]   txf_data;
  logic [CW-1:0]        rxf_count;
  logic                 rxf_in_ready;

  acpc_fifo #(.WIDTH(AW + COLS), .DEPTH(DEPTH)) u_tx_fifo (
    .clk, .rst_n,
    .in_valid(tx_valid), .in_ready(tx_ready), .in_data({tx_addr, tx_data}),
    .out_valid(txf_valid), .out_ready(txf_pop), .out_data(txf_data),
    .count()
  );

  // Read sequencer state.
  logic [AW-1:0] rd_addr_q, rd_rem_q;
  logic          rd_pend_q;      // a read was issued last cycle
  logic          do_read, do_write;

  assign rd_req_ready = (rd_rem_q == '0);
  assign do_write     = txf_valid;
  assign do_read      = !do_write && (rd_rem_q != '0) &&
                        (32'(rxf_count) + 32'(rd_pend_q) < DEPTH);
  assign txf_pop      = do_write;

  always_comb begin
    icap_csib  = !(do_write || do_read);
    icap_rdwrb = do_read;
    icap_addr  = do_write ? txf_data[AW+COLS-1:COLS] : rd_addr_q;
    icap_i     = do_write ? txf_data[COLS-1:0] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_addr_q <= '0;
      rd_rem_q  <= '0;
      rd_pend_q <= 1'b0;
    end else begin
      rd_pend_q <= do_read;
      if (rd_req_valid && rd_req_ready) begin
        rd_addr_q <= rd_req_addr;
        rd_rem_q  <= rd_req_len;
      end else if (do_read) begin
        rd_addr_q <= rd_addr_q + 1'b1;
        rd_rem_q  <= rd_rem_q - 1'b1;
      end
    end
  end

  acpc_fifo #(.WIDTH(COLS), .DEPTH(DEPTH)) u_rx_fifo (
    .clk, .rst_n,
    .in_valid(rd_pend_q), .in_ready(rxf_in_ready), .in_data(icap_o),
    .out_valid(rx_valid), .out_ready(rx_ready), .out_data(rx_data),
    .count(rxf_count)
  );

  assign idle = !txf_valid && (rd_rem_q == '0) && !rd_pend_q;

  // The sequencer only reads when the RX FIFO can take the word.
  assert property (@(posedge clk) disable iff (!rst_n) rd_pend_q |-> rxf_in_ready);

endmodule
