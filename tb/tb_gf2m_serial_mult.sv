// tb_gf2m_serial_mult -- self-checking test of the NAND-only sequential
// GF(2^M) multiplier at M = 45 (f = x^45 + x^4 + x^3 + x + 1) and at M = 16
// (f = x^16 + x^5 + x^3 + x + 1).  Products are compared with a full
// multiply-then-reduce reference; the latency (done exactly M clocks after
// start) and the busy flag are checked for every operation.
module tb_gf2m_serial_mult;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // M = 45
  logic        s45, busy45, done45;
  logic [44:0] a45, b45, c45;
  gf2m_serial_mult dut45 (.clk, .rst_n, .start(s45), .a(a45), .b(b45),
                          .busy(busy45), .done(done45), .c(c45));
  // M = 16
  logic        s16, busy16, done16;
  logic [15:0] a16, b16, c16;
  gf2m_serial_mult #(.M(16), .F_LOW(16'h2B)) dut16 (.clk, .rst_n, .start(s16), .a(a16), .b(b16),
                          .busy(busy16), .done(done16), .c(c16));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic run45(logic [44:0] a, logic [44:0] b);
    int lat = 0;
    w64_t exp = big_mul(w64_t'(a), w64_t'(b), 45, 64'h1B);
    a45 <= a; b45 <= b; s45 <= 1'b1;
    @(posedge clk);
    s45 <= 1'b0; a45 <= '0; b45 <= '0;
    do begin
      @(posedge clk); #1;
      lat++;
      if (lat < 45) check(busy45 && !done45, "busy during M=45 run");
    end while (!done45 && lat < 100);
    check(lat == 45, $sformatf("M=45 latency %0d", lat));
    check(c45 == exp[44:0], $sformatf("M=45 %h*%h got %h exp %h", a, b, c45, exp[44:0]));
  endtask

  task automatic run16(logic [15:0] a, logic [15:0] b);
    int lat = 0;
    w64_t exp = big_mul(w64_t'(a), w64_t'(b), 16, 64'h2B);
    a16 <= a; b16 <= b; s16 <= 1'b1;
    @(posedge clk);
    s16 <= 1'b0;
    do begin
      @(posedge clk); #1;
      lat++;
    end while (!done16 && lat < 100);
    check(lat == 16, $sformatf("M=16 latency %0d", lat));
    check(c16 == exp[15:0], $sformatf("M=16 %h*%h got %h exp %h", a, b, c16, exp[15:0]));
  endtask

  initial begin
    s45 = 0; s16 = 0; a45 = 0; b45 = 0; a16 = 0; b16 = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run45('0, 45'h1234);
    run45(45'h1, 45'h1ABCDEF0123);
    run45({45{1'b1}}, {45{1'b1}});
    run45(45'h1000_0000_0000, 45'h2);           // x^44 * x : reduction path
    for (int i = 0; i < 150; i++) run45(45'(rand64()), 45'(rand64()));
    run16(16'hFFFF, 16'hFFFF);
    run16(16'h8000, 16'h0002);
    for (int i = 0; i < 150; i++) run16(16'($urandom()), 16'($urandom()));
    // start while busy is ignored: a second start mid-run must not disturb it
    begin
      automatic w64_t exp = big_mul(64'h5, 64'h7, 16, 64'h2B);
      a16 <= 16'h5; b16 <= 16'h7; s16 <= 1'b1;
      @(posedge clk); #1;
      a16 <= 16'hFFFF; b16 <= 16'hFFFF;
      repeat (5) @(posedge clk);
      s16 <= 1'b0;
      wait (done16);
      @(negedge clk);
      check(c16 == exp[15:0], "start ignored while busy");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
