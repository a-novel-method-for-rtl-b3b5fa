// tb_acpc_fix_history: self-checking test of acpc_fix_history.
// Logs corrections for two blocks, checks that only the logged bits of the
// selected block are forced, that re-logging a position updates it, that
// clearing a block forgets its entries and that the oldest entry is replaced
// when the table is full.
module tb_acpc_fix_history;
  import acpc_pkg::*;

  localparam int DEPTH = 4;
  logic       clk = 0, rst_n = 0;
  logic       log_valid = 0, log_mat = 0, log_val = 0, clr_valid = 0;
  logic [2:0] log_blk = 0, clr_blk = 0, apply_blk = 0;
  logic [3:0] log_row = 0;
  logic [4:0] log_col = 0;
  cw_t        cw_in = '0, cw_out;
  logic       changed;
  int         checks = 0, failures = 0;

  acpc_fix_history #(.DEPTH(DEPTH), .BLKW(3)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic log_fix(input int b, input int m, input int r, input int c, input bit v);
    @(negedge clk);
    log_valid = 1; log_blk = 3'(b); log_mat = m[0]; log_row = 4'(r); log_col = 5'(c);
    log_val = v;
    @(negedge clk);
    log_valid = 0;
  endtask

  initial begin
    automatic cw_t base, exp;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < $bits(cw_t) / 32 + 1; i++) base = {base, $urandom};
    cw_in = base;
    apply_blk = 1;
    #1 check(cw_out == base && !changed, "empty table passes data through");
    log_fix(1, 0, 3, 4, ~base[0][3][4]);
    log_fix(1, 1, 7, 20, base[1][7][20]);   // same value: no change
    log_fix(2, 0, 1, 1, ~base[0][1][1]);
    exp = base;
    exp[0][3][4] = ~base[0][3][4];
    #1 check(cw_out == exp && changed, "block 1 entries applied");
    apply_blk = 2;
    exp = base;
    exp[0][1][1] = ~base[0][1][1];
    #1 check(cw_out == exp && changed, "block 2 entries applied");
    apply_blk = 3;
    #1 check(cw_out == base && !changed, "block 3 untouched");
    // Update an existing position to the stored value: no more change.
    log_fix(2, 0, 1, 1, base[0][1][1]);
    apply_blk = 2;
    #1 check(cw_out == base && !changed, "entry updated in place");
    // Clear block 1.
    @(negedge clk); clr_valid = 1; clr_blk = 1;
    @(negedge clk); clr_valid = 0;
    apply_blk = 1;
    #1 check(cw_out == base && !changed, "block 1 cleared");
    // Fill the table with block 5 entries; the oldest gets replaced.
    for (int k = 0; k < DEPTH + 1; k++) log_fix(5, 1, 2, k, ~base[1][2][k]);
    apply_blk = 5;
    exp = base;
    for (int k = 0; k < DEPTH + 1; k++) exp[1][2][k] = ~base[1][2][k];
    #1 check(cw_out != exp && changed, "table holds at most DEPTH entries");
    begin
      int n = 0;
      for (int k = 0; k < DEPTH + 1; k++) n += (cw_out[1][2][k] != base[1][2][k]);
      check(n == DEPTH, "exactly DEPTH entries applied");
      check(cw_out[1][2][DEPTH] != base[1][2][DEPTH], "newest entry kept");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
