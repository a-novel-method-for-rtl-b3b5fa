// tb_acpc_fifo: self-checking test of acpc_fifo.
// Random pushes and pops against a queue model; checks data order, the
// full/empty flags and the occupancy count, including simultaneous push and
// pop and the full condition.
module tb_acpc_fifo;
  localparam int WIDTH = 17, DEPTH = 4;
  logic             clk = 0, rst_n = 0, in_valid = 0, out_ready = 0;
  logic [WIDTH-1:0] in_data = '0, out_data;
  logic             in_ready, out_valid;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [WIDTH-1:0] q[$];
  int               checks = 0, failures = 0, fulls = 0;

  acpc_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      check(int'(count) == q.size(), "count");
      check(in_ready == (q.size() < DEPTH), "in_ready");
      check(out_valid == (q.size() > 0), "out_valid");
      if (q.size() > 0) check(out_data == q[0], "head data");
      if (q.size() == DEPTH) fulls++;
      in_valid  = ($urandom_range(3, 0) != 0) ^ (i > 1000);
      in_data   = WIDTH'($urandom);
      out_ready = ($urandom_range(1, 0) != 0);
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    check(fulls > 0, "FIFO became full at least once");
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
