// bch_decoder -- sequences the decoding of one stored codeword: re-encoding,
// syndrome generation, key-equation solving, root finding and correction.
//
// Flow for each word taken from the FIFO (cw_valid/cw_ready):
//   REENC  ask the shared encoder for the parity of the received message
//          part (enc_req, waits for enc_gnt); parity XOR received parity is
//          r(x) mod g(x), from which bch_syndrome forms S_1..S_2T.  The
//          syndromes are registered in the granted clock.
//   CHECK  all syndromes zero: the word is clean, go straight to OUTPUT.
//   KES    bch_fibm, T clocks.
//   ROOTS  bch_brs_chien, ceil(N/PAR) + 1 clocks.
//   OUTPUT corrected message, held until out_ready.
// A word whose LFSR length L exceeds T, or whose root count differs from L,
// has more than T errors: it is flagged uncorrectable and its message is
// passed on unchanged.  The three decoding stages and the re-encoding
// step follow the architecture; decoding one word at a time, the bypass
// for clean words and the failure check are this design's choices.
// out_nerr is the number of corrected bit errors
// (including any in the parity part).
//
// Shortened codes: with KU < K only the low KU message bits carry data and
// the top K - KU are known zeros (the word arrives zero-padded to N bits).
// A located error in one of those padding positions cannot be real, so such
// a word is also flagged uncorrectable.  KU = K (default) is the full code.
//
// Latency from the clock that accepts a word to out_valid, with an
// immediate grant: 2 clocks for a clean word, T + ceil(N/PAR) + 5 clocks for
// a word with errors (17 for BCH(63,45) with PAR = 7).
module bch_decoder
  import bch_pkg::*;
#(
  parameter int unsigned    BCH_M = 6,
  parameter int unsigned    T     = 3,
  parameter logic [BCH_M:0] PRIM  = 7'b1000011,
  parameter int unsigned    PAR   = 7,
  localparam int unsigned   N     = (1 << BCH_M) - 1,
  localparam int unsigned   NK    = poly_deg(gen_poly(BCH_M, prim_t'(PRIM), T)),
  localparam int unsigned   K     = N - NK,
  parameter int unsigned    KU    = K,
  localparam int unsigned   DW    = $clog2(T + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  // received codeword
  input  logic           cw_valid,
  output logic           cw_ready,
  input  logic [N-1:0]   cw_data,
  // shared encoder (re-encoding)
  output logic           enc_req,
  input  logic           enc_gnt,
  output logic [K-1:0]   enc_msg,
  input  logic [NK-1:0]  enc_parity,
  // decoded message
  output logic           out_valid,
  input  logic           out_ready,
  output logic [K-1:0]   out_data,
  output logic           out_err,
  output logic           out_uncorr,
  output logic [DW-1:0]  out_nerr
);
  localparam int unsigned NRW = $clog2(N + 1);

  typedef enum logic [2:0] {S_IDLE, S_REENC, S_CHECK, S_KES, S_ROOTS, S_FIX, S_OUT} state_t;

  state_t                  st_q;
  logic [N-1:0]            r_q;
  logic [2*T:1][BCH_M-1:0] synd_c, synd_q;
  logic                    nz_c, nz_q;
  logic                    kes_start, kes_done, kes_busy;
  logic [T:0][BCH_M-1:0]   sigma;
  logic [DW-1:0]           sig_deg;
  logic [$clog2(2*T+1)-1:0] sig_len;
  logic                    sig_long;
  logic                    rf_start, rf_done, rf_busy;
  logic [N-1:0]            err_vec;
  logic [NRW-1:0]          n_roots;
  logic [K-1:0]            msg_q;
  logic                    err_q, unc_q;
  logic [DW-1:0]           nerr_q;
  logic                    pad_hit;

  if (KU < K) begin : g_short
    assign pad_hit = |err_vec[N-1:NK+KU];
  end else begin : g_full
    assign pad_hit = 1'b0;
  end

  bch_syndrome #(.BCH_M(BCH_M), .T(T), .PRIM(PRIM)) u_synd (
    .rem_in (enc_parity ^ r_q[NK-1:0]),
    .synd   (synd_c),
    .nonzero(nz_c)
  );

  bch_fibm #(.BCH_M(BCH_M), .T(T), .PRIM(PRIM)) u_kes (
    .clk, .rst_n, .start(kes_start), .synd(synd_q),
    .busy(kes_busy), .done(kes_done), .sigma, .degree(sig_deg),
    .length(sig_len), .too_long(sig_long)
  );

  bch_brs_chien #(.BCH_M(BCH_M), .T(T), .PRIM(PRIM), .PAR(PAR)) u_rf (
    .clk, .rst_n, .start(rf_start), .sigma,
    .busy(rf_busy), .done(rf_done), .err_vec, .num_roots(n_roots)
  );

  assign cw_ready  = (st_q == S_IDLE);
  assign enc_req   = (st_q == S_REENC);
  assign enc_msg   = r_q[N-1:NK];
  assign kes_start = (st_q == S_CHECK) && nz_q;
  assign rf_start  = (st_q == S_KES) && kes_done;
  assign out_valid = (st_q == S_OUT);
  assign out_data  = msg_q;
  assign out_err   = err_q;
  assign out_uncorr = unc_q;
  assign out_nerr  = nerr_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st_q   <= S_IDLE;
      r_q    <= '0;
      synd_q <= '0;
      nz_q   <= 1'b0;
      msg_q  <= '0;
      err_q  <= 1'b0;
      unc_q  <= 1'b0;
      nerr_q <= '0;
    end else begin
      unique case (st_q)
        S_IDLE:  if (cw_valid) begin
                   r_q  <= cw_data;
                   st_q <= S_REENC;
                 end
        S_REENC: if (enc_gnt) begin
                   synd_q <= synd_c;
                   nz_q   <= nz_c;
                   st_q   <= S_CHECK;
                 end
        S_CHECK: if (nz_q) st_q <= S_KES;
                 else begin
                   msg_q  <= r_q[N-1:NK];
                   err_q  <= 1'b0;
                   unc_q  <= 1'b0;
                   nerr_q <= '0;
                   st_q   <= S_OUT;
                 end
        S_KES:   if (kes_done) st_q <= S_ROOTS;
        S_ROOTS: if (rf_done) st_q <= S_FIX;
        S_FIX:   begin
                   err_q <= 1'b1;
                   if (!sig_long && n_roots == NRW'(sig_len) && !pad_hit) begin
                     msg_q  <= r_q[N-1:NK] ^ err_vec[N-1:NK];
                     unc_q  <= 1'b0;
                     nerr_q <= sig_deg;
                   end else begin
                     msg_q  <= r_q[N-1:NK];
                     unc_q  <= 1'b1;
                     nerr_q <= '0;
                   end
                   st_q <= S_OUT;
                 end
        S_OUT:   if (out_ready) st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // The key-equation solver and root finder are only started when idle.
  a_kes_idle : assert property (@(posedge clk) disable iff (!rst_n) kes_start |-> !kes_busy);
  a_rf_idle  : assert property (@(posedge clk) disable iff (!rst_n) rf_start |-> !rf_busy);
endmodule
