// tb_bch_decoder_t5 -- the decoder test of tb_bch_decoder repeated for a
// 5-error-correcting code, BCH(63,36) over GF(2^6) (x^6 + x + 1), with the
// decoder's T set to 5.  Here the root search has two Chien terms (sigma_3,
// sigma_5) next to the affine part (sigma_0, sigma_1, sigma_2, sigma_4).  The shared
// encoder is modelled in the testbench by long division, and its grant is
// withheld at random.  Codewords carry 0..5 random bit errors:
//   0..5 errors  -> exact message, error flag as expected, error count
//   6..7 errors  -> error flag set; either flagged uncorrectable with the raw
//                   message, or miscorrected to another codeword within
//                   distance 5 of the received word
// With an immediate grant the latency must be 2 clocks for a clean word and
// T + 9 + 5 = 19 clocks for a word with errors.  Output stalls are random.
module tb_bch_decoder_t5;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_clean = 0, n_corr = 0, n_uncorr = 0, n_miscorr = 0, n_gnt_wait = 0;

  logic        cw_valid, cw_ready, enc_req, enc_gnt, out_valid, out_ready;
  logic        out_err, out_uncorr;
  logic [62:0] cw_data;
  logic [35:0] enc_msg, out_data;
  logic [26:0] enc_parity;
  logic [2:0]  out_nerr;

  bch_decoder #(.T(5)) dut (.clk, .rst_n, .cw_valid, .cw_ready, .cw_data,
                   .enc_req, .enc_gnt, .enc_msg, .enc_parity,
                   .out_valid, .out_ready, .out_data, .out_err, .out_uncorr, .out_nerr);

  // Behavioural encoder.
  always_comb begin
    w256_t c;
    c = encode(w256_t'(enc_msg), G_63_36, 27);
    enc_parity = c[26:0];
  end

  logic gnt_hold;
  assign enc_gnt = enc_req && !gnt_hold;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    cw_valid = 0; cw_data = '0; out_ready = 0; gnt_hold = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int it = 0; it < 500; it++) begin
      automatic logic [35:0] msg = 36'(rand64());
      automatic int          wt  = (it % 8 < 6) ? (it % 6) : 6 + (it % 2);
      automatic w256_t       cw  = encode(w256_t'(msg), G_63_36, 27) ^ rand_err(63, wt);
      automatic bit          slow = (it % 3 == 0);
      automatic int          lat = 0;
      automatic bit          waited = 0;
      @(negedge clk);
      cw_valid = 1'b1;
      cw_data  = cw[62:0];
      @(posedge clk); #1;
      check(!cw_ready, "accepted word leaves IDLE");
      @(negedge clk);
      cw_valid = 1'b0;
      cw_data  = '0;
      out_ready = 1'b0;
      lat = 0;
      while (!out_valid && lat < 100) begin
        gnt_hold = slow && ($urandom_range(1, 0) == 1);
        if (enc_req && gnt_hold) waited = 1;
        @(negedge clk);
        lat++;
      end
      gnt_hold = 0;
      if (waited) n_gnt_wait++;
      else check(lat == ((wt == 0) ? 2 : 19), $sformatf("latency %0d for weight %0d", lat, wt));
      repeat ($urandom_range(3, 0)) @(negedge clk);
      check(out_valid, "out_valid held until out_ready");
      check(out_err == (wt != 0), "error flag");
      if (wt <= 5) begin
        check(out_data == msg, $sformatf("it %0d wt %0d data %h exp %h", it, wt, out_data, msg));
        check(!out_uncorr && int'(out_nerr) == wt, "correctable: flags and count");
        if (wt == 0) n_clean++; else n_corr++;
      end else if (out_uncorr) begin
        check(out_data == cw[62:27], "uncorrectable word passed unchanged");
        n_uncorr++;
      end else begin
        // miscorrection to a codeword at distance <= 3 from the received word
        automatic w256_t got = encode(w256_t'(out_data), G_63_36, 27);
        check($countones(got[62:0] ^ cw[62:0]) <= 5 && out_data != msg,
              "miscorrection lands on a codeword within distance 5 of the received word");
        n_miscorr++;
      end
      out_ready = 1'b1;
      @(negedge clk);
      out_ready = 1'b0;
    end
    check(n_clean > 0 && n_corr > 0 && n_uncorr > 0 && n_gnt_wait > 0, "all paths exercised");
    $display("clean %0d corrected %0d uncorrectable %0d miscorrected %0d grant-waits %0d",
             n_clean, n_corr, n_uncorr, n_miscorr, n_gnt_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
