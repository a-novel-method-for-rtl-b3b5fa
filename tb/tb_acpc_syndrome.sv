// tb_acpc_syndrome: self-checking test of acpc_syndrome.
// A reference codeword has all-zero syndromes; flipping one bit must set
// exactly the syndrome bits of the diagonals and column through that bit,
// worked out here from its coordinates.
module tb_acpc_syndrome;
  import acpc_pkg::*;
  import tb_acpc_ref_pkg::*;

  cw_t          cw;
  logic [W-1:0] xd_pos, xd_neg, xv_m1, xv_m2;
  int           checks = 0, failures = 0;

  acpc_syndrome dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int i = 0; i < 100; i++) begin
      automatic cw_t good = ref_encode(rand_data());
      cw = good;
      #1;
      check(xd_pos == 0 && xd_neg == 0 && xv_m1 == 0 && xv_m2 == 0, "clean codeword");
      for (int k = 0; k < 4; k++) begin
        automatic int a = $urandom_range(1, 0);
        automatic int t = $urandom_range(8, 0);
        automatic int c = $urandom_range(W - 1, 0);
        automatic logic [W-1:0] e_own = 0, e_oth = 0, e_v = 0;
        if (t < 8) begin
          if (c + t < int'(W)) e_own[c+t] = 1'b1;
          if (c - t + 15 < int'(W)) e_oth[c-t+15] = 1'b1;
        end
        e_v[c] = 1'b1;
        cw = good;
        cw[a][t][c] = ~cw[a][t][c];
        #1;
        check((a == 0 ? xd_pos : xd_neg) == e_own, "own-slope diagonal syndrome");
        check((a == 0 ? xd_neg : xd_pos) == e_oth, "other-slope diagonal syndrome");
        check((a == 0 ? xv_m1 : xv_m2) == e_v && (a == 0 ? xv_m2 : xv_m1) == 0,
              "vertical syndrome");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
