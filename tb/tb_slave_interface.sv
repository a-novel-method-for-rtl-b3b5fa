// tb_slave_interface: self-checking test of slave_interface.
// Starts transfers of several bit lengths, streams rows with random stalls on
// both sides, and checks cfg_start/cfg_pr, the row count, the position of
// m_last (the row that reaches the bit length), that rows are refused outside
// a transfer, the icap_done pulse after cfg_done, and the re-download request.
module tb_slave_interface;
  import acpc_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        icap_start = 0, s_valid = 0, m_ready = 0, cfg_done = 0;
  logic        redownload_valid = 0;
  logic [1:0]  pr_index = 0, redownload_idx = 0;
  logic [15:0] bit_length = 0;
  row_t        s_data = '0;
  logic        s_ready, icap_done, redownload_req, cfg_start, m_valid, m_last;
  logic [1:0]  redownload_pr, cfg_pr;
  row_t        m_data;
  int          checks = 0, failures = 0;

  slave_interface #(.PRW(2), .LW(16)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic transfer(input int pr, input int bits);
    int rows = (bits + 16) / 17;
    int got = 0;
    bit saw_start = 0, done_seen = 0;
    if (rows == 0) rows = 1;
    @(negedge clk);
    icap_start = 1; pr_index = 2'(pr); bit_length = 16'(bits);
    @(negedge clk);
    icap_start = 0;
    check(cfg_start && cfg_pr == 2'(pr), "cfg_start with partition");
    while (got < rows + 3) begin
      s_valid = ($urandom_range(3, 0) != 0) || got >= rows;
      s_data  = row_t'(got);
      m_ready = ($urandom_range(3, 0) != 0);
      @(posedge clk);
      if (s_valid && s_ready) begin
        check(m_valid && m_data == row_t'(got), "row passed through");
        check(m_last == (got == rows - 1), "m_last on the last row");
        check(got < rows, "no row accepted beyond the bit length");
        got++;
      end
      @(negedge clk);
      if (got == rows) got = got + 3;  // stop driving
    end
    s_valid = 0;
    check(!s_ready, "rows refused after the transfer");
    check(!icap_done, "no icap_done before cfg_done");
    cfg_done = 1;
    @(negedge clk);
    cfg_done = 0;
    check(icap_done, "icap_done after cfg_done");
    @(negedge clk);
    check(!icap_done, "icap_done is a pulse");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(!s_ready, "no transfer open after reset");
    transfer(0, 238);
    transfer(3, 476);
    transfer(1, 100);
    transfer(2, 17);
    // Re-download request is held until the master starts a transfer.
    @(negedge clk);
    redownload_valid = 1; redownload_idx = 2;
    @(negedge clk);
    redownload_valid = 0;
    repeat (3) @(negedge clk);
    check(redownload_req && redownload_pr == 2, "re-download request held");
    transfer(2, 238);
    check(!redownload_req, "request dropped once the master restarts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
