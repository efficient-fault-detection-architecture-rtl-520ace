// ft_gf_mult_top -- fault-tolerant GF(2^M) multiplier: the product of a
// NAND-only sequential polynomial-basis multiplier is protected by a binary
// BCH code (default: 45-bit multiplier, BCH(63,45), t = 3).
//
//   a, b --> gf2m_serial_mult --> bch_encoder --> codeword_fifo --> bch_decoder --> product
//                                      ^                                 |
//                                      +---------- re-encoding ----------+
//
// The product (the K-bit message) is encoded systematically and the codeword
// is stored in the FIFO.  The decoder reads it back, has the same encoder
// re-encode the message part to obtain r(x) mod g(x), and, if that is non-zero,
// finds and corrects up to T bit errors.
//
// Encoder sharing: a finished product is encoded in the clock it completes,
// or in the first later clock the FIFO can take it; in that clock a
// re-encoding request from the decoder waits.
//
// Timing: with an empty FIFO and an idle decoder, out_valid rises M + 4
// clocks after the clock that accepts the operands for a clean word
// (M multiply, 1 encode/write, 1 FIFO read, 2 decode), and T + ceil(N/PAR) + 3
// clocks later for a word with errors.
// The multiplier accepts new operands (in_valid/in_ready) only when its last
// product has been written to the FIFO.
//
// fault_mask is XORed into every codeword as it is written to the FIFO; it
// models faults that upset the stored result and lets the correction path be
// exercised.  Tie it to zero in normal use.  This port is this design's
// addition: the architecture does not show where faults enter.  The chain
// multiplier -> encoder -> FIFO -> decoder and the encoder reuse follow the
// architecture; the FIFO depth and all handshakes are this design's own.
//
// Results leave on out_valid/out_ready in operand order.
//
// Code length: with M = K the full code is used.  With M < K the code is
// shortened to (NK + M, M): the product is the low part of a K-bit message
// whose top K - M bits are zero, only the NK + M low codeword bits are
// stored (fault_mask and the FIFO are that wide), and the decoder sees the
// word zero-padded back to N bits.  This is how the 45-bit multiplier gets
// t = 4 or 5: e.g. BCH(127,92) over GF(2^7), t = 5, shortened to (80,45).
// M > K fails the elaboration.
module ft_gf_mult_top
  import bch_pkg::*;
#(
  parameter int unsigned    M          = 45,
  parameter logic [M-1:0]   F_LOW      = M'('h1B),
  parameter int unsigned    BCH_M      = 6,
  parameter int unsigned    T          = 3,
  parameter logic [BCH_M:0] PRIM       = 7'b1000011,
  parameter int unsigned    PAR        = 7,
  parameter int unsigned    FIFO_DEPTH = 4,
  localparam int unsigned   N          = (1 << BCH_M) - 1,
  localparam int unsigned   NK         = poly_deg(gen_poly(BCH_M, prim_t'(PRIM), T)),
  localparam int unsigned   K          = N - NK,
  localparam int unsigned   NS         = NK + M,
  localparam int unsigned   DW         = $clog2(T + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [M-1:0]  a,
  input  logic [M-1:0]  b,
  input  logic [NS-1:0] fault_mask,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [M-1:0]  product,
  output logic          err_detected,
  output logic          uncorrectable,
  output logic [DW-1:0] num_errors
);
  if (M > K) begin : g_bad_size
    $error("ft_gf_mult_top: multiplier width M exceeds the BCH message length K");
  end

  logic          m_busy, m_done, pend_q;
  logic [M-1:0]  m_c;
  logic [K-1:0]  enc_msg, dec_msg;
  logic [NK-1:0] enc_par;
  logic [N-1:0]  enc_cw;
  logic          enc_wr, dec_req, dec_gnt;
  logic          f_wr_ready, f_rd_valid, f_rd_ready;
  logic [NS-1:0] f_rd_data;

  assign in_ready = !m_busy && !m_done && !pend_q;

  gf2m_serial_mult #(.M(M), .F_LOW(F_LOW)) u_mult (
    .clk, .rst_n, .start(in_valid && in_ready), .a, .b,
    .busy(m_busy), .done(m_done), .c(m_c)
  );

  // A finished product is encoded in its done clock if the FIFO has room;
  // otherwise it waits in the multiplier (pend_q) until there is room.
  always_ff @(posedge clk) begin
    if (!rst_n)      pend_q <= 1'b0;
    else if (enc_wr) pend_q <= 1'b0;
    else if (m_done) pend_q <= 1'b1;
  end

  // Shared encoder: encoding has priority, re-encoding uses it when idle.
  assign enc_wr  = (m_done || pend_q) && f_wr_ready;
  assign dec_gnt = dec_req && !enc_wr;
  assign enc_msg = enc_wr ? K'(m_c) : dec_msg;

  bch_encoder #(.BCH_M(BCH_M), .T(T), .PRIM(PRIM)) u_enc (
    .msg(enc_msg), .parity(enc_par), .codeword(enc_cw)
  );

  codeword_fifo #(.WIDTH(NS), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_valid(enc_wr), .wr_ready(f_wr_ready), .wr_data(enc_cw[NS-1:0] ^ fault_mask),
    .rd_valid(f_rd_valid), .rd_ready(f_rd_ready), .rd_data(f_rd_data),
    .count()
  );

  logic [K-1:0] dec_out;
  bch_decoder #(.BCH_M(BCH_M), .T(T), .PRIM(PRIM), .PAR(PAR), .KU(M)) u_dec (
    .clk, .rst_n,
    .cw_valid(f_rd_valid), .cw_ready(f_rd_ready), .cw_data(N'(f_rd_data)),
    .enc_req(dec_req), .enc_gnt(dec_gnt), .enc_msg(dec_msg), .enc_parity(enc_par),
    .out_valid, .out_ready, .out_data(dec_out),
    .out_err(err_detected), .out_uncorr(uncorrectable), .out_nerr(num_errors)
  );

  assign product = M'(dec_out);
endmodule
