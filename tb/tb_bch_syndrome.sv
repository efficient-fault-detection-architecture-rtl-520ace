// tb_bch_syndrome -- self-checking test of the syndrome generator for
// BCH(63,45).  A random codeword plus a random error pattern (weight 0..5)
// gives r(x); the remainder r mod g is the block's input and every S_i,
// i = 1..6, is compared with a direct Horner evaluation of the whole r(x) at
// alpha^i.  The error flag must be set exactly when r is not a codeword.
module tb_bch_syndrome;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [17:0]       rem_in;
  logic [6:1][5:0]   synd;
  logic              nonzero;
  bch_syndrome dut (.rem_in, .synd, .nonzero);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int it = 0; it < 400; it++) begin
      automatic w256_t msg = w256_t'(45'(rand64()));
      automatic w256_t cw  = encode(msg, G_63_45, 18);
      automatic int    wt  = it % 6;
      automatic w256_t r   = cw ^ rand_err(63, wt);
      automatic w256_t rm  = poly_mod(r, G_63_45, 18);
      rem_in = rm[17:0];
      #1;
      for (int i = 1; i <= 6; i++) begin
        automatic int s = eval_at(r, 63, i, 6, 'b1000011);
        check(int'(synd[i]) == s, $sformatf("it %0d S%0d got %h exp %h", it, i, synd[i], s));
      end
      check(nonzero == (wt != 0), "nonzero flag");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
