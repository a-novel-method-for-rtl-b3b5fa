// tb_acpc_ctrl: self-checking test of acpc_ctrl, the ACPC block, at a reduced
// size (2 partitions of 1 code block, scrub interval 50 cycles) with the HWICAP
// buffers and the configuration-memory model around it.
//
// The configuration stream is driven directly on the controller's slave-side
// port. Checks: rows reach configuration memory unchanged; the stored check
// rows equal an independent encoding of the data; a clean pass writes nothing;
// a single error is corrected and its partition written back; an upset at a
// logged position is removed by the history; excess errors give a re-download
// request and no write-back; the timer starts a pass by itself.
module tb_acpc_ctrl;
  import acpc_pkg::*;
  import tb_acpc_ref_pkg::*;

  localparam int N_PR = 2, BPP = 1, N_BLK = N_PR * BPP;
  localparam int AW = $clog2(N_BLK * BLK_ROWS);
  localparam int NROWS = N_BLK * BLK_ROWS;

  logic          clk = 0, rst_n = 0;
  logic          cfg_start = 0, m_valid = 0, m_last = 0, scrub_en = 0, scrub_now = 0;
  logic [0:0]    cfg_pr = '0;
  row_t          m_data = '0;
  logic          m_ready, cfg_done, redownload_valid, scrub_done;
  logic [0:0]    redownload_idx;
  logic [N_PR-1:0] fault_map;
  logic [15:0]   corr_count, hist_count;
  logic          tx_valid, tx_ready, rd_req_valid, rd_req_ready, rx_valid, rx_ready;
  logic [AW-1:0] tx_addr, rd_req_addr, rd_req_len;
  row_t          tx_data, rx_data;
  logic          icap_idle;
  logic          enc_start, par_check_start, enc_done, decode_start, dia_syn;
  logic          syn_nonzero, varticle_syn, error_detect, error_correct, decode_done;
  logic          icap_csib, icap_rdwrb;
  logic [AW-1:0] icap_addr;
  row_t          icap_i, icap_o;

  acpc_ctrl #(.N_PR(N_PR), .BLK_PER_PR(BPP), .SCRUB_INTERVAL(50), .HIST_DEPTH(4)) dut (.*);
  hwicap #(.AW(AW), .DEPTH(4)) u_hwicap (
    .clk, .rst_n, .tx_valid, .tx_ready, .tx_addr, .tx_data,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len,
    .rx_valid, .rx_ready, .rx_data, .idle(icap_idle),
    .icap_csib, .icap_rdwrb, .icap_addr, .icap_i, .icap_o
  );
  cfg_mem_model #(.AW(AW), .ROWW(COLS)) mem (.*);

  always #5 clk = ~clk;

  row_t golden [NROWS];
  int   checks = 0, failures = 0, redl = 0;

  always @(posedge clk) if (rst_n && redownload_valid) redl++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic bit mem_ok();
    for (int i = 0; i < NROWS; i++) if (mem.peek(i) != golden[i]) return 0;
    return 1;
  endfunction

  task automatic configure(input int pr, input int nrows);
    int sent = 0, cyc = 0;
    @(negedge clk);
    cfg_start = 1; cfg_pr = 1'(pr);
    @(negedge clk);
    cfg_start = 0;
    while (sent < nrows) begin
      m_valid = 1;
      m_data  = golden[pr * BLK_ROWS + sent];
      m_last  = (sent == nrows - 1);
      @(posedge clk);
      if (m_ready) sent++;
      @(negedge clk);
    end
    m_valid = 0;
    m_last  = 0;
    while (!cfg_done && cyc < 1000) begin
      @(negedge clk);
      cyc++;
    end
    check(cfg_done, "cfg_done after configuration");
  endtask

  task automatic scrub();
    int cyc = 0;
    @(negedge clk);
    scrub_now = 1;
    @(negedge clk);
    scrub_now = 0;
    while (!scrub_done && cyc < 5000) begin
      @(negedge clk);
      cyc++;
    end
    check(scrub_done, "scrub pass completed");
    repeat (2) @(negedge clk);
  endtask

  function automatic data_t blk_data(input int b);
    data_t d;
    for (int r = 0; r < int'(BLK_ROWS); r++)
      if (r < int'(DROWS)) d[0][r] = golden[b * BLK_ROWS + r];
      else                 d[1][r - DROWS] = golden[b * BLK_ROWS + r];
    return d;
  endfunction

  initial begin
    int w0, c0, h0;
    for (int i = 0; i < NROWS; i++) golden[i] = row_t'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    configure(0, BLK_ROWS);
    configure(1, BLK_ROWS);
    check(mem_ok(), "configuration memory holds the data");
    for (int b = 0; b < N_BLK; b++)
      check(dut.fec_mem[b] == get_fec(ref_encode(blk_data(b))), "stored FEC equals reference");

    w0 = mem.n_writes;
    scrub();
    check(fault_map == 0 && mem.n_writes == w0, "clean pass writes nothing");

    mem.upset(1 * BLK_ROWS + 9, 4);             // block 1, M2 row 3, column 4
    w0 = mem.n_writes;
    c0 = corr_count;
    scrub();
    check(fault_map == 2'b10 && corr_count == c0 + 1, "single error corrected");
    check(mem_ok() && mem.n_writes == w0 + BLK_ROWS, "partition 1 written back");

    mem.upset(1 * BLK_ROWS + 9, 4);
    h0 = hist_count;
    c0 = corr_count;
    scrub();
    check(hist_count == h0 + 1 && corr_count == c0 && mem_ok(), "history fix");

    mem.upset(0 * BLK_ROWS + 1, 5);             // M1 rows 2 and 6 of column 5,
    mem.upset(0 * BLK_ROWS + 5, 5);             // rows 3 and 7 of column 9
    mem.upset(0 * BLK_ROWS + 2, 9);
    mem.upset(0 * BLK_ROWS + 6, 9);
    w0 = mem.n_writes;
    redl = 0;
    scrub();
    check(redl == 1 && redownload_idx == 0, "re-download requested for partition 0");
    check(mem.n_writes == w0 && !mem_ok(), "uncorrectable partition not written");
    configure(0, BLK_ROWS);
    check(mem_ok(), "partition restored by re-configuration");

    mem.upset(0 * BLK_ROWS + 13, 16);
    scrub_en = 1;
    begin
      int cyc = 0;
      while (!scrub_done && cyc < 2000) begin
        @(negedge clk);
        cyc++;
      end
      check(scrub_done && cyc >= 50, "timer-started pass");
    end
    scrub_en = 0;
    check(mem_ok(), "timer pass corrected the error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
