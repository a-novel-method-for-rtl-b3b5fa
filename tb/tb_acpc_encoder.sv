// tb_acpc_encoder: self-checking test of acpc_encoder.
// Encodes random and hand-picked data blocks and compares the codeword with
// the scatter-form reference model; checks the handshake timing
// (par_check_start one cycle after enc_start, enc_done two cycles after).
module tb_acpc_encoder;
  import acpc_pkg::*;
  import tb_acpc_ref_pkg::*;

  logic  clk = 0, rst_n = 0, enc_start = 0;
  data_t data_in = '0;
  logic  par_check_start, enc_done;
  cw_t   enc_data;
  fec_t  fec;
  int    checks = 0, failures = 0;

  acpc_encoder dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(input data_t d);
    cw_t exp = ref_encode(d);
    @(negedge clk);
    data_in   = d;
    enc_start = 1;
    @(negedge clk);
    enc_start = 0;
    check(par_check_start == 1 && enc_done == 0, "par_check_start one cycle after enc_start");
    @(negedge clk);
    check(enc_done == 1 && par_check_start == 0, "enc_done two cycles after enc_start");
    check(enc_data == exp, "codeword matches reference");
    check(fec[0][0] == exp[0][0] && fec[1][0] == exp[1][0] &&
          fec[0][1] == exp[0][ROWS-1] && fec[1][1] == exp[1][ROWS-1], "fec rows");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(enc_done == 1, "enc_done high after reset");
    run('0);
    begin
      automatic data_t d = '0;
      d[0][3][5] = 1'b1;   // one bit of M1, row 4, column 5
      run(d);
      // diagonal 9 of M1, column 5 of M1 rows 0 and 8, diagonal 16 of M2
      check(enc_data[0][0] == 24'(1) << 9, "single bit: M1 cross parity");
      check(enc_data[1][0] == 24'(1) << 16, "single bit: M2 cross parity");
      check(enc_data[0][8] == ((24'(1) << 5) ^ (24'(1) << 9)), "single bit: M1 vertical parity");
    end
    run('1);
    for (int i = 0; i < 200; i++) run(rand_data());
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
