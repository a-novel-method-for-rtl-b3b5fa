// tb_hwicap: self-checking test of hwicap with the configuration-memory model.
// Writes random rows through the TX FIFO, reads them back with read requests
// while the reader stalls at random, and checks data, order, that writes
// queued before a read are done first, and one port access per cycle.
module tb_hwicap;
  import acpc_pkg::*;
  localparam int AW = 7, DEPTH = 4;

  logic          clk = 0, rst_n = 0;
  logic          tx_valid = 0, rd_req_valid = 0, rx_ready = 0;
  logic [AW-1:0] tx_addr = '0, rd_req_addr = '0, rd_req_len = '0;
  row_t          tx_data = '0, rx_data;
  logic          tx_ready, rd_req_ready, rx_valid, idle;
  logic          icap_csib, icap_rdwrb;
  logic [AW-1:0] icap_addr;
  row_t          icap_i, icap_o;
  row_t          shadow [2**AW];
  int            checks = 0, failures = 0, stalls = 0;

  hwicap #(.AW(AW), .DEPTH(DEPTH)) dut (.*);
  cfg_mem_model #(.AW(AW), .ROWW(COLS)) mem (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic write_row(input int a, input row_t d);
    @(negedge clk);
    tx_valid = 1; tx_addr = AW'(a); tx_data = d;
    do @(posedge clk); while (!tx_ready);
    @(negedge clk);
    tx_valid = 0;
    shadow[a] = d;
  endtask

  task automatic read_rows(input int a, input int n);
    int got = 0;
    @(negedge clk);
    rd_req_valid = 1; rd_req_addr = AW'(a); rd_req_len = AW'(n);
    do @(posedge clk); while (!rd_req_ready);
    @(negedge clk);
    rd_req_valid = 0;
    while (got < n) begin
      rx_ready = ($urandom_range(2, 0) == 0);
      if (!rx_ready && rx_valid) stalls++;
      @(posedge clk);
      if (rx_valid && rx_ready) begin
        check(rx_data == shadow[a + got], "read-back data");
        got++;
      end
      @(negedge clk);
    end
    rx_ready = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2**AW; i++) write_row(i, row_t'($urandom));
    wait (idle);
    check(mem.n_writes == 2**AW, "one port write per row");
    for (int i = 0; i < 2**AW; i++) check(mem.peek(i) == shadow[i], "memory content");
    read_rows(0, 40);
    read_rows(100, 28);
    // Writes queued just before a read must land first.
    write_row(7, 17'h1abcd);
    read_rows(5, 4);
    check(stalls > 0, "reader stalled the RX FIFO");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
