// tb_bch_brs_chien -- self-checking test of the BRS + Chien root finder for
// GF(2^6), t = 3, 7 lanes.  sigma(x) is built in the testbench as
// c * prod (1 + alpha^p x) over 0..3 chosen error positions p, with a random
// non-zero scale c; the block must return exactly those positions and their
// count.  Random polynomials, most of whose roots lie outside GF(2^6), are
// checked against a brute-force evaluation at every non-zero element.  done
// must pulse ceil(63/7) = 9 clocks after start.  Two further instances
// check the worked GF(2^3) example y^2 + a^3 y + a^4 (roots 011 and 110) and
// locators of degree 4..6 over GF(2^6), where the affine part carries
// sigma_0, sigma_1, sigma_2, sigma_4 and the Chien part sigma_3, sigma_5,
// sigma_6.
module tb_bch_brs_chien;
  import tb_ref_pkg::*;

  localparam int PRIM = 'b1000011;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic            start, busy, done;
  logic [3:0][5:0] sigma;
  logic [62:0]     err_vec;
  logic [5:0]      num_roots;
  bch_brs_chien dut (.clk, .rst_n, .start, .sigma, .busy, .done, .err_vec, .num_roots);

  // Worked example: y^2 + a^3 y + a^4 over GF(2^3) from x^3 + x^2 + 1, whose
  // roots are y = 011 and y = 110.
  logic            s3, busy3, done3;
  logic [2:0][2:0] sigma3;
  logic [6:0]      ev3;
  logic [2:0]      nr3;
  bch_brs_chien #(.BCH_M(3), .T(2), .PRIM(4'b1101), .PAR(2)) dut3 (
    .clk, .rst_n, .start(s3), .sigma(sigma3), .busy(busy3), .done(done3),
    .err_vec(ev3), .num_roots(nr3));

  // Degree-6 locators over GF(2^6): affine part sigma_0,1,2,4, Chien part
  // sigma_3,5,6.
  logic            s6, busy6, done6;
  logic [6:0][5:0] sigma6;
  logic [62:0]     ev6;
  logic [5:0]      nr6;
  bch_brs_chien #(.BCH_M(6), .T(6)) dut6 (
    .clk, .rst_n, .start(s6), .sigma(sigma6), .busy(busy6), .done(done6),
    .err_vec(ev6), .num_roots(nr6));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic run(logic [3:0][5:0] s, output logic [62:0] ev, output int nr);
    int lat = 0;
    sigma <= s;
    start <= 1'b1;
    @(posedge clk); #1;
    start <= 1'b0;
    while (!done && lat < 40) begin
      @(posedge clk); #1;
      lat++;
    end
    check(lat == 9, $sformatf("latency %0d", lat));
    ev = err_vec;
    nr = int'(num_roots);
  endtask

  initial begin
    logic [62:0] ev;
    int          nr;
    start = 0; sigma = '0; s3 = 0; sigma3 = '0; s6 = 0; sigma6 = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int it = 0; it < 300; it++) begin
      automatic int    wt = it % 4;
      automatic w256_t e  = rand_err(63, wt);
      automatic int    poly [4] = '{1, 0, 0, 0};
      automatic int    c  = int'($urandom_range(63, 1));
      logic [3:0][5:0] s;
      // multiply by (1 + alpha^p x) for each error position p
      for (int p = 0; p < 63; p++) if (e[p]) begin
        automatic int ap = sm_pow(p, 6, PRIM);
        for (int j = 3; j >= 1; j--) poly[j] ^= sm_mul(poly[j-1], ap, 6, PRIM);
      end
      for (int j = 0; j <= 3; j++) s[j] = 6'(sm_mul(poly[j], c, 6, PRIM));
      run(s, ev, nr);
      check(ev == e[62:0], $sformatf("it %0d err_vec %h exp %h", it, ev, e[62:0]));
      check(nr == wt, $sformatf("it %0d roots %0d exp %0d", it, nr, wt));
    end
    // Arbitrary polynomials, most with fewer roots than their degree: the
    // reference is a brute-force evaluation at every non-zero element.
    for (int it = 0; it < 40; it++) begin
      logic [3:0][5:0] s;
      automatic int ref_roots = 0;
      automatic logic [62:0] ref_ev = '0;
      for (int j = 0; j <= 3; j++) s[j] = 6'($urandom());
      if (s[0] == '0) s[0] = 6'd1;
      for (int i = 1; i <= 63; i++) begin
        automatic int v = 0;
        for (int j = 0; j <= 3; j++) v ^= sm_mul(int'(s[j]), sm_pow(i * j, 6, PRIM), 6, PRIM);
        if (v == 0) begin
          ref_roots++;
          ref_ev[(63 - i) % 63] = 1'b1;
        end
      end
      run(s, ev, nr);
      check(ev == ref_ev && nr == ref_roots, $sformatf("random sigma %h roots %0d exp %0d", s, nr, ref_roots));
    end
    // GF(2^3) example.  alpha^i = 011 for i = 5 and 110 for i = 6 with
    // x^3 + x^2 + 1, so the roots mark positions 7-5 = 2 and 7-6 = 1.
    begin
      automatic int a3 = sm_pow(3, 3, 'b1101), a4 = sm_pow(4, 3, 'b1101);
      check(sm_pow(5, 3, 'b1101) == 'b011 && sm_pow(6, 3, 'b1101) == 'b110, "GF(8) element check");
      sigma3 = {3'(1), 3'(a3), 3'(a4)};
      s3 = 1'b1;
      @(posedge clk); #1;
      s3 = 1'b0;
      wait (done3);
      @(posedge clk); #1;
      check(nr3 == 3'd2 && ev3 == 7'b0000110, $sformatf("GF(8) example roots %0d pattern %b", nr3, ev3));
    end
    // Degree-6 locators built from 6 random positions.
    for (int it = 0; it < 60; it++) begin
      automatic w256_t e = rand_err(63, 6 - it % 3);
      automatic int    poly [7] = '{1, 0, 0, 0, 0, 0, 0};
      for (int p = 0; p < 63; p++) if (e[p]) begin
        automatic int ap = sm_pow(p, 6, PRIM);
        for (int j = 6; j >= 1; j--) poly[j] ^= sm_mul(poly[j-1], ap, 6, PRIM);
      end
      for (int j = 0; j <= 6; j++) sigma6[j] = 6'(poly[j]);
      s6 = 1'b1;
      @(posedge clk); #1;
      s6 = 1'b0;
      wait (done6);
      @(posedge clk); #1;
      check(ev6 == e[62:0] && int'(nr6) == 6 - it % 3, $sformatf("degree-6 it %0d", it));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
