// codeword_fifo -- synchronous FIFO holding encoded codewords between the
// BCH encoder and the BCH decoder.
//
// A register array of DEPTH words with read and write pointers and an
// occupancy counter.  Write side: wr_valid/wr_ready (ready = not full).
// Read side is first-word-fall-through: rd_data shows the oldest word while
// rd_valid is high and is removed in a clock where rd_ready is also high.
// A simultaneous read and write is allowed when full (the read frees the
// slot in the same clock).  The depth and the handshake are this design's
// choice; the architecture only states that codewords are kept in a FIFO.
// Synchronous active-low reset empties it.
module codeword_fifo #(
  parameter int unsigned WIDTH = 63,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [WIDTH-1:0] wr_data,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data,
  output logic [CW-1:0]    count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp_q, rp_q;
  logic [CW-1:0]    cnt_q;
  logic             do_wr, do_rd;

  assign rd_valid = (cnt_q != '0);
  assign do_rd    = rd_valid && rd_ready;
  assign wr_ready = (cnt_q != CW'(DEPTH)) || do_rd;
  assign do_wr    = wr_valid && wr_ready;
  assign rd_data  = mem[rp_q];
  assign count    = cnt_q;

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp_q] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_wr) wp_q <= incr(wp_q);
      if (do_rd) rp_q <= incr(rp_q);
      cnt_q <= cnt_q + CW'(do_wr) - CW'(do_rd);
    end
  end

  // Handshake rules: never more words than slots, never a read from empty.
  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n) cnt_q <= CW'(DEPTH));
  a_rd_nonempty : assert property (@(posedge clk) disable iff (!rst_n) do_rd |-> cnt_q != '0);
endmodule
