// tb_ft_gf_mult_short -- end-to-end test of the 45-bit fault-tolerant
// multiplier with 4 and 5 correctable errors.  A 45-bit product needs a
// longer code than BCH(63,45) for t > 3; here both runs use BCH codes over
// GF(2^7) from x^7 + x^3 + 1, shortened to a 45-bit message:
//   t = 4: BCH(127,99), g = 0x1C9C26B9 (degree 28), shortened to (73,45)
//   t = 5: BCH(127,92), g = 0xCA76024D7 (degree 35), shortened to (80,45)
// Each run is a tb_ft_short_env (stimulus, checks and mechanism counts are
// described there); the two run side by side and their counts are summed.
module tb_ft_gf_mult_short;
  import tb_ref_pkg::*;

  logic done4, done5;
  int   checks4, failures4, checks5, failures5;

  tb_ft_short_env #(.T(4), .NK(28), .G(256'h1C9C26B9))  u_t4 (.done(done4), .checks(checks4), .failures(failures4));
  tb_ft_short_env #(.T(5), .NK(35), .G(256'hCA76024D7)) u_t5 (.done(done5), .checks(checks5), .failures(failures5));

  initial begin
    wait (done4 === 1'b1 && done5 === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks4 + checks5, failures4 + failures5);
    $finish;
  end

  initial begin
    #500000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks4 + checks5, failures4 + failures5 + 1);
    $finish;
  end
endmodule
