// tb_bch_encoder -- self-checking test of the parallel systematic BCH
// encoder for BCH(63,45) (default) and BCH(31,16).  The parity is compared
// with long division by the literal generator polynomial, and every codeword
// is checked to be a multiple of g(x) with the message in its top K bits.
module tb_bch_encoder;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [44:0] m63;
  logic [17:0] p63;
  logic [62:0] c63;
  bch_encoder dut63 (.msg(m63), .parity(p63), .codeword(c63));

  logic [15:0] m31;
  logic [14:0] p31;
  logic [30:0] c31;
  bch_encoder #(.BCH_M(5), .T(3), .PRIM(6'b100101)) dut31 (.msg(m31), .parity(p31), .codeword(c31));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int i = 0; i < 600; i++) begin
      w256_t e63, e31;
      case (i)
        0:       begin m63 = '0;          m31 = '0;          end
        1:       begin m63 = '1;          m31 = '1;          end
        2,3,4,5: begin m63 = 45'(1) << (i * 11 - 22 + (i == 5 ? 0 : 0)); m31 = 16'(1) << (i * 5 - 10); end
        default: begin m63 = 45'(rand64()); m31 = 16'($urandom()); end
      endcase
      #1;
      e63 = encode(w256_t'(m63), G_63_45, 18);
      e31 = encode(w256_t'(m31), G_31_16, 15);
      check(c63 == e63[62:0], $sformatf("63: msg %h cw %h exp %h", m63, c63, e63[62:0]));
      check(p63 == c63[17:0] && c63[62:18] == m63, "63: codeword layout");
      check(poly_mod(w256_t'(c63), G_63_45, 18) == '0, "63: codeword not a multiple of g");
      check(c31 == e31[30:0], $sformatf("31: msg %h cw %h exp %h", m31, c31, e31[30:0]));
      check(p31 == c31[14:0] && c31[30:15] == m31, "31: codeword layout");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
