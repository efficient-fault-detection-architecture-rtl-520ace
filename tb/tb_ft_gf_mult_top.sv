// tb_ft_gf_mult_top -- end-to-end test of the fault-tolerant multiplier at
// its default size: 45-bit GF(2^45) multiplier, BCH(63,45), t = 3.
//
// A stream of random operand pairs is issued; with each one a fault pattern
// of 0..5 random bits is placed on fault_mask, which upsets the stored
// codeword of that product.  Results are compared in order with a reference
// product (full multiply, then reduction):
//   0 faults     -> exact product, no error flag
//   1..3 faults  -> exact product, error flag, correct error count
//   4..5 faults  -> error flag; uncorrectable (raw stored product returned)
//                   or a miscorrection to a codeword within distance 3
// The output side stalls in long random bursts so that the FIFO fills and
// the multiplier is held back.  The testbench counts each mechanism of the
// design and fails if one never happened: clean words that skip decoding,
// corrected words, uncorrectable words, re-encoding requests held off by an
// encoding (shared encoder), FIFO full with a product waiting, and operand
// back-pressure.  The latency of the first (clean) operation is checked:
// out_valid M + 4 clocks after the accepting clock.
module tb_ft_gf_mult_top;
  import tb_ref_pkg::*;

  localparam int   M     = 45;
  localparam int   N     = 63;
  localparam int   NK    = 18;
  localparam w64_t F_LOW = 64'h1B;
  localparam int   OPS   = 400;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_clean = 0, n_corr = 0, n_uncorr = 0, n_miscorr = 0;
  int n_share_stall = 0, n_fifo_full = 0, n_in_stall = 0;

  logic          in_valid, in_ready, out_valid, out_ready;
  logic [M-1:0]  a, b, product;
  logic [N-1:0]  fault_mask;
  logic          err_detected, uncorrectable;
  logic [1:0]    num_errors;

  ft_gf_mult_top dut (.clk, .rst_n, .in_valid, .in_ready, .a, .b, .fault_mask,
                      .out_valid, .out_ready, .product, .err_detected, .uncorrectable,
                      .num_errors);

  typedef struct {
    logic [M-1:0] prod;
    logic [M-1:0] raw;     // product as stored, faults included
    int           weight;
    logic [N-1:0] stored;  // codeword as stored, faults included
  } exp_t;
  exp_t exp_q [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // Mechanism counters, sampled every clock.
  always @(posedge clk) if (rst_n) begin
    if (dut.dec_req && dut.enc_wr)      n_share_stall++;
    if ((dut.pend_q || dut.m_done) && !dut.f_wr_ready) n_fifo_full++;
    if (in_valid && !in_ready && dut.pend_q) n_in_stall++;
  end

  // Driver.
  int issued = 0;
  int first_issue_cycle = -1, first_out_cycle = -1, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;
  always @(negedge clk) if (out_valid && first_out_cycle < 0) first_out_cycle = cycle;

  initial begin
    in_valid = 0; a = '0; b = '0; fault_mask = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    while (issued < OPS) begin
      automatic logic [M-1:0] na = M'(rand64());
      automatic logic [M-1:0] nb = M'(rand64());
      automatic int           r  = int'($urandom_range(99, 0));
      automatic int           wt = (issued == 0) ? 0 : (r < 25) ? 0 : (r < 80) ? 1 + r % 3 : 4 + r % 2;
      automatic w256_t        fm = rand_err(N, wt);
      automatic w64_t         p  = big_mul(w64_t'(na), w64_t'(nb), M, F_LOW);
      automatic exp_t         e;
      in_valid = 1'b1;
      a = na;
      b = nb;
      // the previous product has been stored once in_ready is high again
      while (!in_ready) @(negedge clk);
      fault_mask = fm[N-1:0];
      if (issued == 0) first_issue_cycle = cycle;
      @(negedge clk);
      in_valid = 1'b0;
      e.prod   = p[M-1:0];
      e.raw    = p[M-1:0] ^ fm[N-1:NK];
      e.weight = wt;
      begin
        automatic w256_t cw = encode(w256_t'(p[M-1:0]), G_63_45, NK);
        e.stored = cw[N-1:0] ^ fm[N-1:0];
      end
      exp_q.push_back(e);
      issued++;
    end
  end

  // Output side with bursty stalls.
  initial begin
    automatic int got = 0;
    out_ready = 0;
    wait (rst_n);
    while (got < OPS) begin
      @(negedge clk);
      unique case ((cycle / 400) % 3)
        0: out_ready = ($urandom_range(99, 0) < 70);
        1: out_ready = 1'b0;                                   // long stall: FIFO fills
        // Release the decoder so that it asks for re-encoding in the very
        // clock a product completes (multiplier two steps from the end).
        default: out_ready = (dut.u_mult.cnt_q == 2) || ($urandom_range(99, 0) < 5);
      endcase
      if (out_valid && out_ready) begin
        automatic exp_t e = exp_q.pop_front();
        check(err_detected == (e.weight != 0), $sformatf("op %0d error flag", got));
        if (e.weight <= 3) begin
          check(product == e.prod, $sformatf("op %0d product %h exp %h", got, product, e.prod));
          check(!uncorrectable && int'(num_errors) == e.weight, $sformatf("op %0d flags", got));
          if (e.weight == 0) n_clean++; else n_corr++;
        end else if (uncorrectable) begin
          check(product == e.raw, $sformatf("op %0d uncorrectable data", got));
          n_uncorr++;
        end else begin
          automatic w256_t c = encode(w256_t'(product), G_63_45, NK);
          check(product != e.prod && $countones(c[N-1:0] ^ e.stored) <= 3,
                "miscorrection lands on a codeword within distance 3 of the stored word");
          n_miscorr++;
        end
        got++;
      end
    end
    // issue is counted from the clock before the accepting edge
    check(first_out_cycle - first_issue_cycle == M + 5,
          $sformatf("first result latency %0d", first_out_cycle - first_issue_cycle));
    check(n_clean > 0,       "clean words (decoding skipped) seen");
    check(n_corr > 0,        "corrected words seen");
    check(n_uncorr > 0,      "uncorrectable words seen");
    check(n_share_stall > 0, "re-encoding held off by encoding seen");
    check(n_fifo_full > 0,   "FIFO full seen");
    check(n_in_stall > 0,    "operand back-pressure seen");
    $display("clean %0d corrected %0d uncorrectable %0d miscorrected %0d", n_clean, n_corr, n_uncorr, n_miscorr);
    $display("encoder-share stalls %0d, FIFO-full clocks %0d, operand stalls %0d", n_share_stall, n_fifo_full, n_in_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (OPS * 120 + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
