// tb_acpc_icap_top: end-to-end test of the proposed ICAP block at its default
// size (4 partitions x 2 code blocks x 14 rows, scrub every 1000 idle cycles).
//
// A master model streams a random partial bit file from its "secondary
// memory" into the block, which encodes it and writes it to the
// configuration-memory model. Soft errors are then injected into the model and
// scrub passes are run. The test checks, against the golden file kept by the
// master, that:
//   - configuration writes the file unchanged and pulses ICAP_done;
//   - a clean pass writes nothing and reports no fault;
//   - single errors and two-errors-in-a-column are corrected and only the
//     faulty partitions are written back (fault_map, write count);
//   - an upset that returns at a logged position is removed by the
//     correction history before decoding (hist_count);
//   - errors beyond the code's capacity raise a re-download request for that
//     partition, which the master answers by sending it again;
//   - a pass also starts on its own after the scrub interval.
// Each of these mechanisms is counted and must happen at least once.
module tb_acpc_icap_top;
  import acpc_pkg::*;

  localparam int N_PR = 4, BPP = 2, N_BLK = N_PR * BPP;
  localparam int AW = $clog2(N_BLK * BLK_ROWS);
  localparam int NROWS = N_BLK * BLK_ROWS;

  logic            clk = 0, rst_n = 0;
  logic            icap_start = 0, s_valid = 0, scrub_en = 0, scrub_now = 0;
  logic [1:0]      pr_index = 0;
  logic [15:0]     bit_length = 0;
  row_t            s_data = '0;
  logic            s_ready, icap_done, redownload_req, scrub_done;
  logic [1:0]      redownload_pr;
  logic [N_PR-1:0] fault_map;
  logic [15:0]     corr_count, hist_count;
  logic            enc_start, par_check_start, enc_done, decode_start, dia_syn;
  logic            syn_nonzero, varticle_syn, error_detect, error_correct, decode_done;
  logic            icap_csib, icap_rdwrb;
  logic [AW-1:0]   icap_addr;
  row_t            icap_i, icap_o;

  acpc_icap_top dut (.*);
  cfg_mem_model #(.AW(AW), .ROWW(COLS)) mem (.*);

  always #5 clk = ~clk;

  row_t golden [NROWS];       // the master's secondary memory
  int   checks = 0, failures = 0;
  int   n_config = 0, n_encode = 0, n_clean = 0, n_writeback = 0, n_history = 0;
  int   n_redownload = 0, n_timer = 0, n_detect = 0;

  always @(posedge clk) if (rst_n) begin
    if (par_check_start) n_encode++;
    if (error_detect) n_detect++;
  end

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

  // Master: send partitions first_pr .. first_pr+npr-1 and wait for ICAP_done.
  task automatic configure(input int first_pr, input int npr);
    int rows = npr * BPP * BLK_ROWS;
    int base = first_pr * BPP * BLK_ROWS;
    int sent = 0, wait_cycles = 0;
    @(negedge clk);
    icap_start = 1; pr_index = 2'(first_pr); bit_length = 16'(rows * COLS);
    @(negedge clk);
    icap_start = 0;
    while (sent < rows) begin
      s_valid = 1; s_data = golden[base + sent];
      @(posedge clk);
      if (s_ready) sent++;
      @(negedge clk);
    end
    s_valid = 0;
    while (!icap_done && wait_cycles < 2000) begin
      @(negedge clk);
      wait_cycles++;
    end
    check(icap_done, "ICAP_done after configuration");
    n_config++;
  endtask

  task automatic scrub();
    int wait_cycles = 0;
    @(negedge clk);
    scrub_now = 1;
    @(negedge clk);
    scrub_now = 0;
    while (!scrub_done && wait_cycles < 20000) begin
      @(negedge clk);
      wait_cycles++;
    end
    check(scrub_done, "scrub pass completed");
    repeat (2) @(negedge clk);
  endtask

  // Soft error at (block, matrix, row 1..7, column) of the stored data.
  function automatic void upset(input int blk, input int m, input int r, input int c);
    mem.upset(blk * BLK_ROWS + m * DROWS + r - 1, c);
  endfunction

  initial begin
    int w0, c0, h0;
    for (int i = 0; i < NROWS; i++) golden[i] = row_t'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // Configuration phase: the whole PR file in one transfer.
    configure(0, N_PR);
    check(mem_ok(), "configuration memory holds the bit file");
    check(n_encode == N_BLK, "one encoding per code block");

    // Clean scrub pass.
    w0 = mem.n_writes;
    scrub();
    check(fault_map == 0 && corr_count == 0, "clean pass: no faults");
    check(mem.n_writes == w0, "clean pass: nothing written");
    if (fault_map == 0 && mem.n_writes == w0) n_clean++;

    // Correctable errors in partitions 1 and 2.
    upset(2, 0, 4, 3);          // partition 1: single error
    upset(5, 0, 2, 11);         // partition 2: two errors in column 11,
    upset(5, 1, 6, 11);         //   one in each half
    w0 = mem.n_writes;
    c0 = corr_count;
    scrub();
    check(fault_map == 4'b0110, "fault map names partitions 1 and 2");
    check(corr_count == c0 + 3, "three corrections");
    check(mem_ok(), "corrected partitions written back");
    check(mem.n_writes == w0 + 2 * BPP * BLK_ROWS, "only faulty partitions rewritten");
    if (mem_ok() && fault_map == 4'b0110) n_writeback++;

    // The same bit is upset again: the history removes it before decoding.
    upset(2, 0, 4, 3);
    c0 = corr_count;
    h0 = hist_count;
    scrub();
    check(hist_count == h0 + 1, "correction history applied");
    check(corr_count == c0, "no decoder correction needed");
    check(mem_ok(), "history fix written back");
    if (hist_count == h0 + 1 && mem_ok()) n_history++;

    // Beyond capacity in partition 3: two columns of M1 with two errors each.
    upset(7, 0, 2, 5);
    upset(7, 0, 6, 5);
    upset(7, 0, 3, 9);
    upset(7, 0, 7, 9);
    scrub();
    check(redownload_req && redownload_pr == 2'd3, "re-download of partition 3 requested");
    check(fault_map[3], "fault map names partition 3");
    check(!mem_ok(), "uncorrectable partition not written back");
    if (redownload_req && redownload_pr == 2'd3) begin
      configure(3, 1);
      n_redownload++;
    end
    check(!redownload_req, "request cleared by the re-download");
    check(mem_ok(), "partition 3 restored by the master");
    scrub();
    check(fault_map == 0, "clean after re-download");

    // Periodic scrubbing: a pass starts by itself after the interval.
    upset(0, 1, 7, 16);
    scrub_en = 1;
    begin
      int cyc = 0;
      while (!scrub_done && cyc < 5000) begin
        @(negedge clk);
        cyc++;
      end
      check(scrub_done && cyc >= 1000, "timer-started pass after the interval");
      if (scrub_done) n_timer++;
    end
    scrub_en = 0;
    repeat (2) @(negedge clk);
    check(mem_ok(), "timer pass corrected the error");

    check(n_config > 0, "mechanism: configuration");
    check(n_encode > 0, "mechanism: encoding");
    check(n_clean > 0, "mechanism: clean pass");
    check(n_detect > 0, "mechanism: decoder error detection");
    check(n_writeback > 0, "mechanism: correction and write-back");
    check(n_history > 0, "mechanism: blind correction from history");
    check(n_redownload > 0, "mechanism: re-download beyond capacity");
    check(n_timer > 0, "mechanism: periodic scrub");
    $display("mechanisms: config=%0d encode=%0d clean=%0d detect=%0d writeback=%0d history=%0d redownload=%0d timer=%0d",
             n_config, n_encode, n_clean, n_detect, n_writeback, n_history, n_redownload, n_timer);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
