// tb_ft_short_env -- one run of the fault-tolerant 45-bit multiplier with a
// shortened code of larger t, used by tb_ft_gf_mult_short.  The multiplier
// is GF(2^45) with f = x^45 + x^4 + x^3 + x + 1; the code is a BCH code over
// GF(2^7) (x^7 + x^3 + 1) of correcting power T, shortened to NK + 45 bits.
//
// A stream of OPS random operand pairs is issued, each with a fault pattern
// of 0 .. T + 2 random bits on fault_mask over the stored NK + 45 bits.
// Results are compared in order with a reference product:
//   0 faults     -> exact product, no error flag
//   1..T faults  -> exact product, error flag, correct error count
//   T+1, T+2     -> error flag; uncorrectable (raw stored product returned)
//                   or a miscorrection to a codeword within distance T
// The output side stalls in bursts as in tb_ft_gf_mult_top, and the same
// mechanisms must each be seen: clean words, corrected words, uncorrectable
// words, re-encoding held off by an encoding, FIFO full and operand
// back-pressure.  The first (clean) result must come M + 4 clocks after the
// accepting clock.  done rises when all results are in; checks and
// failures are then final.
module tb_ft_short_env
  import tb_ref_pkg::*;
#(
  parameter int    T   = 5,
  parameter int    NK  = 35,
  parameter w256_t G   = 256'hCA76024D7,
  parameter int    OPS = 300
) (
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int   M     = 45;
  localparam int   NS    = NK + M;
  localparam w64_t F_LOW = 64'h1B;
  localparam int   DW    = $clog2(T + 1);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int n_clean = 0, n_corr = 0, n_uncorr = 0, n_miscorr = 0;
  int n_share_stall = 0, n_fifo_full = 0, n_in_stall = 0;

  logic          in_valid, in_ready, out_valid, out_ready;
  logic [M-1:0]  a, b, product;
  logic [NS-1:0] fault_mask;
  logic          err_detected, uncorrectable;
  logic [DW-1:0] num_errors;

  ft_gf_mult_top #(.M(45), .F_LOW(45'h1B), .BCH_M(7), .T(T), .PRIM(8'b10001001))
    dut (.clk, .rst_n, .in_valid, .in_ready, .a, .b, .fault_mask,
         .out_valid, .out_ready, .product, .err_detected, .uncorrectable,
         .num_errors);

  typedef struct {
    logic [M-1:0]  prod;
    logic [M-1:0]  raw;     // product as stored, faults included
    int            weight;
    logic [NS-1:0] stored;  // codeword as stored, faults included
  } exp_t;
  exp_t exp_q [$];

  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0d %s", T, what);
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
      automatic int           wt = (issued == 0) ? 0 : (r < 20) ? 0 :
                                   (r < 80) ? 1 + r % T : T + 1 + r % 2;
      automatic w256_t        fm = rand_err(NS, wt);
      automatic w64_t         p  = big_mul(w64_t'(na), w64_t'(nb), M, F_LOW);
      automatic exp_t         e;
      in_valid = 1'b1;
      a = na;
      b = nb;
      // the previous product has been stored once in_ready is high again
      while (!in_ready) @(negedge clk);
      fault_mask = fm[NS-1:0];
      if (issued == 0) first_issue_cycle = cycle;
      @(negedge clk);
      in_valid = 1'b0;
      e.prod   = p[M-1:0];
      e.raw    = p[M-1:0] ^ fm[NS-1:NK];
      e.weight = wt;
      begin
        automatic w256_t cw = encode(w256_t'(p[M-1:0]), G, NK);
        e.stored = cw[NS-1:0] ^ fm[NS-1:0];
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
        if (e.weight <= T) begin
          check(product == e.prod, $sformatf("op %0d product %h exp %h", got, product, e.prod));
          check(!uncorrectable && int'(num_errors) == e.weight, $sformatf("op %0d flags", got));
          if (e.weight == 0) n_clean++; else n_corr++;
        end else if (uncorrectable) begin
          check(product == e.raw, $sformatf("op %0d uncorrectable data", got));
          n_uncorr++;
        end else begin
          automatic w256_t c = encode(w256_t'(product), G, NK);
          check(product != e.prod && $countones(c[NS-1:0] ^ e.stored) <= T,
                "miscorrection lands on a codeword within distance T of the stored word");
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
    $display("t=%0d (%0d,45): clean %0d corrected %0d uncorrectable %0d miscorrected %0d",
             T, NS, n_clean, n_corr, n_uncorr, n_miscorr);
    $display("t=%0d: encoder-share stalls %0d, FIFO-full clocks %0d, operand stalls %0d",
             T, n_share_stall, n_fifo_full, n_in_stall);
    done = 1'b1;
  end
endmodule
