// tb_bch_fibm -- self-checking test of the key-equation solver for
// BCH(63,45), t = 3.  For random error patterns of weight 0..3 the testbench
// computes S_1..S_6 directly, runs the solver and then checks, by evaluating
// the returned sigma(x) at every non-zero field element, that its roots are
// exactly alpha^(-p) for the error positions p and that its degree equals
// the number of errors.  done must pulse exactly T = 3 clocks after start.
module tb_bch_fibm;
  import tb_ref_pkg::*;

  localparam int PRIM = 'b1000011;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic            start, busy, done;
  logic [6:1][5:0] synd;
  logic [3:0][5:0] sigma;
  logic [1:0]      degree;
  logic [2:0]      length;
  logic            too_long;
  bch_fibm dut (.clk, .rst_n, .start, .synd, .busy, .done, .sigma, .degree, .length, .too_long);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    start = 0; synd = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int it = 0; it < 400; it++) begin
      automatic int    wt = it % 4;
      automatic w256_t e  = rand_err(63, wt);
      automatic int    lat = 0;
      for (int i = 1; i <= 6; i++) synd[i] = 6'(eval_at(e, 63, i, 6, PRIM));
      start <= 1'b1;
      @(posedge clk); #1;
      start <= 1'b0;
      while (!done && lat < 20) begin
        @(posedge clk); #1;
        lat++;
      end
      check(lat == 3, $sformatf("latency %0d", lat));
      check(int'(degree) == wt, $sformatf("degree %0d for %0d errors", degree, wt));
      check(int'(length) == wt && !too_long, $sformatf("length %0d for %0d errors", length, wt));
      for (int i = 0; i < 63; i++) begin
        // sigma(alpha^i) == 0 exactly when position (63 - i) mod 63 is in error
        automatic int v = 0;
        for (int j = 0; j <= 3; j++) v ^= sm_mul(int'(sigma[j]), sm_pow(i * j, 6, PRIM), 6, PRIM);
        check((v == 0) == bit'(e[(63 - i) % 63]), $sformatf("it %0d root test at alpha^%0d", it, i));
      end
    end
    // 4..6 errors: the LFSR length must exceed t for some words.
    begin
      automatic int n_long = 0;
      for (int it = 0; it < 200; it++) begin
        automatic w256_t e = rand_err(63, 4 + it % 3);
        for (int i = 1; i <= 6; i++) synd[i] = 6'(eval_at(e, 63, i, 6, PRIM));
        start <= 1'b1;
        @(posedge clk); #1;
        start <= 1'b0;
        wait (done);
        @(posedge clk); #1;
        check(too_long == (length > 3), "too_long flag");
        if (too_long) n_long++;
      end
      check(n_long > 0, "length above t seen for more than t errors");
      $display("words with 4..6 errors flagged by length: %0d of 200", n_long);
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
