// acpc_icap_top: the proposed ICAP block, protecting a partially
// reconfigurable region with the adaptive cross parity check (ACPC) code.
//
// Three sub-blocks, wired as in the published architecture drawing:
//   slave_interface  takes ICAP_start, the bit length and the partial bit file
//                    from the master and returns ICAP_done;
//   acpc_ctrl        encodes the file on its way into configuration memory
//                    (keeping the check rows itself), and later scrubs the
//                    region: reads it back, corrects it and writes corrected
//                    partitions back, or asks the master to download a
//                    partition again when the errors exceed the code;
//   hwicap           TX and RX FIFOs in front of the single configuration port.
// The master (processor), the bus adapter between master and slave interface,
// the secondary memory and the ICAP primitive with the configuration memory
// lie outside; their signals are ports of this module. The configuration port
// is row-addressed: icap_csib = 0 selects, icap_rdwrb = 1 reads, read data on
// icap_o one cycle after the strobe.
//
// Default size: 4 partitions of 2 code blocks, each block 14 rows of 17 bits
// of configuration data (112 rows), a scrub pass every 1000 idle cycles.
// These sizes are this design's choices; the 9 x 17 matrix pair is the
// published code block.
module acpc_icap_top
  import acpc_pkg::*;
#(
  parameter int unsigned N_PR           = 4,
  parameter int unsigned BLK_PER_PR     = 2,
  parameter int unsigned SCRUB_INTERVAL = 1000,
  parameter int unsigned HIST_DEPTH     = 8,
  parameter int unsigned FIFO_DEPTH     = 16,
  localparam int unsigned PRW = (N_PR > 1) ? $clog2(N_PR) : 1,
  localparam int unsigned AW  = $clog2(N_PR * BLK_PER_PR * BLK_ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  // master side
  input  logic            icap_start,
  input  logic [PRW-1:0]  pr_index,
  input  logic [15:0]     bit_length,
  input  logic            s_valid,
  output logic            s_ready,
  input  row_t            s_data,
  output logic            icap_done,
  output logic            redownload_req,
  output logic [PRW-1:0]  redownload_pr,
  // scrubbing control and status
  input  logic            scrub_en,
  input  logic            scrub_now,
  output logic            scrub_done,
  output logic [N_PR-1:0] fault_map,
  output logic [15:0]     corr_count,
  output logic [15:0]     hist_count,
  // encoder / decoder status (published timing-diagram signals)
  output logic            enc_start,
  output logic            par_check_start,
  output logic            enc_done,
  output logic            decode_start,
  output logic            dia_syn,
  output logic            syn_nonzero,
  output logic            varticle_syn,
  output logic            error_detect,
  output logic            error_correct,
  output logic            decode_done,
  // configuration port
  output logic            icap_csib,
  output logic            icap_rdwrb,
  output logic [AW-1:0]   icap_addr,
  output row_t            icap_i,
  input  row_t            icap_o
);

  logic           cfg_start, m_valid, m_ready, m_last, cfg_done;
  logic [PRW-1:0] cfg_pr, redownload_idx;
  logic           redownload_valid;
  row_t           m_data;

  slave_interface #(.PRW(PRW), .LW(16)) u_slave (
    .clk, .rst_n,
    .icap_start, .pr_index, .bit_length, .s_valid, .s_ready, .s_data,
    .icap_done, .redownload_req, .redownload_pr,
    .cfg_start, .cfg_pr, .m_valid, .m_ready, .m_data, .m_last, .cfg_done,
    .redownload_valid, .redownload_idx
  );

  logic          tx_valid, tx_ready, rd_req_valid, rd_req_ready;
  logic          rx_valid, rx_ready, icap_idle;
  logic [AW-1:0] tx_addr, rd_req_addr, rd_req_len;
  row_t          tx_data, rx_data;

  acpc_ctrl #(
    .N_PR(N_PR), .BLK_PER_PR(BLK_PER_PR), .SCRUB_INTERVAL(SCRUB_INTERVAL),
    .HIST_DEPTH(HIST_DEPTH)
  ) u_acpc (
    .clk, .rst_n,
    .cfg_start, .cfg_pr, .m_valid, .m_ready, .m_data, .m_last, .cfg_done,
    .redownload_valid, .redownload_idx,
    .scrub_en, .scrub_now, .scrub_done, .fault_map, .corr_count, .hist_count,
    .tx_valid, .tx_ready, .tx_addr, .tx_data,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len,
    .rx_valid, .rx_ready, .rx_data, .icap_idle,
    .enc_start, .par_check_start, .enc_done, .decode_start, .dia_syn,
    .syn_nonzero, .varticle_syn, .error_detect, .error_correct, .decode_done
  );

  hwicap #(.AW(AW), .DEPTH(FIFO_DEPTH)) u_hwicap (
    .clk, .rst_n,
    .tx_valid, .tx_ready, .tx_addr, .tx_data,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len,
    .rx_valid, .rx_ready, .rx_data, .idle(icap_idle),
    .icap_csib, .icap_rdwrb, .icap_addr, .icap_i, .icap_o
  );

endmodule
