// tb_acpc_decoder: self-checking test of acpc_decoder.
// Encodes random blocks with the reference model, injects error patterns the
// code is meant to correct (single errors anywhere in rows 0..7, two errors
// in one column one in each half, two errors on one diagonal as in the
// adaptive example, three errors on one diagonal) and checks that the decoder
// restores the codeword, counts the corrections, pulses error_detect and
// error_correct once per correction, and takes 2*W+1 cycles on a clean block.
// A pattern the code cannot locate (two errors in one column of one matrix)
// must be flagged uncorrectable.
module tb_acpc_decoder;
  import acpc_pkg::*;
  import tb_acpc_ref_pkg::*;

  logic clk = 0, rst_n = 0, decode_start = 0;
  cw_t  cw_in = '0, cw_out;
  logic dia_syn, syn_nonzero, varticle_syn, error_detect, error_correct;
  logic decode_done, busy, uncorrectable, fix_mat;
  logic [7:0] n_corr;
  logic [3:0] fix_row;
  logic [4:0] fix_col;
  int   checks = 0, failures = 0;
  int   n_det, n_cor, n_vert, cycles;

  acpc_decoder dut (.*);

  always #5 clk = ~clk;

  always @(negedge clk) begin
    if (error_detect) n_det++;
    if (error_correct) n_cor++;
    if (!varticle_syn && syn_nonzero) n_vert++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic decode(input cw_t bad);
    @(negedge clk);
    n_det = 0; n_cor = 0; n_vert = 0; cycles = 0;
    cw_in = bad;
    decode_start = 1;
    do begin
      @(negedge clk);
      cycles++;
    end while (!decode_done && cycles < 5000);
    decode_start = 0;
  endtask

  task automatic flip(inout cw_t cw, input int a, input int t, input int c);
    cw[a][t][c] = ~cw[a][t][c];
  endtask

  task automatic expect_fixed(input cw_t good, input int nerr, input string what);
    check(cw_out == good, {what, ": codeword restored"});
    check(!uncorrectable, {what, ": not flagged"});
    check(int'(n_corr) == nerr && n_det == nerr && n_cor == nerr,
          {what, ": correction count"});
    if (cw_out != good || int'(n_corr) != nerr || n_det != nerr || n_cor != nerr)
      $display("  %s: n_corr=%0d detects=%0d corrects=%0d cycles=%0d", what, n_corr, n_det, n_cor, cycles);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Clean block: latency and no corrections.
    begin
      automatic cw_t good = ref_encode(rand_data());
      decode(good);
      check(cycles == 2 * int'(W) + 1, "clean block latency 2*W+1");
      expect_fixed(good, 0, "clean");
      check(n_vert == 0, "no vertical search on a clean block");
    end
    // Every single-bit error in rows 0..7 of data columns.
    for (int a = 0; a < 2; a++)
      for (int t = 0; t < 8; t++)
        for (int c = 0; c < int'(COLS); c += 3) begin
          automatic cw_t good = ref_encode(rand_data());
          automatic cw_t bad = good;
          flip(bad, a, t, c);
          decode(bad);
          expect_fixed(good, 1, "single error");
          check(n_vert > 0, "vertical search used");
        end
    // Two errors in one column, one in M1 and one in M2.
    for (int i = 0; i < 40; i++) begin
      automatic cw_t good = ref_encode(rand_data());
      automatic cw_t bad = good;
      automatic int c = $urandom_range(COLS - 1, 0);
      flip(bad, 0, $urandom_range(7, 1), c);
      flip(bad, 1, $urandom_range(7, 1), c);
      decode(bad);
      expect_fixed(good, 2, "column pair");
    end
    // Adaptive example: M1 row 4 col 3 and M2 row 5 col 9 share negative diagonal 14.
    begin
      automatic cw_t good = ref_encode(rand_data());
      automatic cw_t bad = good;
      flip(bad, 0, 4, 3);
      flip(bad, 1, 5, 9);
      decode(bad);
      expect_fixed(good, 2, "shared diagonal");
    end
    // Three errors on positive diagonal 12 in M1, rows 1, 4, 6.
    for (int i = 0; i < 10; i++) begin
      automatic cw_t good = ref_encode(rand_data());
      automatic cw_t bad = good;
      flip(bad, 0, 1, 11);
      flip(bad, 0, 4, 8);
      flip(bad, 0, 6, 6);
      decode(bad);
      expect_fixed(good, 3, "three on a diagonal");
    end
    // Beyond capacity: two errors in the same column of M1.
    begin
      automatic cw_t good = ref_encode(rand_data());
      automatic cw_t bad = good;
      flip(bad, 0, 2, 5);
      flip(bad, 0, 2 + 1, 5 - 1);   // same positive diagonal 7, other column
      flip(bad, 0, 5, 4);           // column 4 now holds two errors
      decode(bad);
      check(uncorrectable || cw_out == good, "excess errors flagged or fixed");
      bad = good;
      flip(bad, 0, 2, 5);
      flip(bad, 0, 6, 5);
      flip(bad, 0, 3, 9);
      flip(bad, 0, 7, 9);
      decode(bad);
      check(uncorrectable && cw_out != good, "four errors in two columns flagged");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
