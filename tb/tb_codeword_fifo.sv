// tb_codeword_fifo -- self-checking test of the codeword FIFO (63-bit words,
// depth 4).  Random writes and reads with random stalls are compared with a
// queue model: order, data, occupancy count and the full/empty handshake
// signals, including a write into a full FIFO in the same clock as a read.
module tb_codeword_fifo;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_full = 0, n_wr_rd_full = 0;

  logic        wr_valid, wr_ready, rd_valid, rd_ready;
  logic [62:0] wr_data, rd_data;
  logic [2:0]  count;
  logic [62:0] model [$];

  codeword_fifo dut (.clk, .rst_n, .wr_valid, .wr_ready, .wr_data,
                     .rd_valid, .rd_ready, .rd_data, .count);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    wr_valid = 0; rd_ready = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      automatic int phase = (cyc / 250) % 3;   // 0: fill-heavy, 1: balanced, 2: drain-heavy
      @(negedge clk);
      wr_valid = ($urandom_range(99, 0) < (phase == 0 ? 80 : phase == 1 ? 50 : 20));
      rd_ready = ($urandom_range(99, 0) < (phase == 0 ? 20 : phase == 1 ? 50 : 80));
      wr_data  = {$urandom(), $urandom()};
      #1;
      check(int'(count) == model.size(), $sformatf("count %0d model %0d", count, model.size()));
      check(rd_valid == (model.size() != 0), "rd_valid");
      check(wr_ready == (model.size() < 4 || (rd_ready && model.size() != 0)), "wr_ready");
      if (model.size() == 4) n_full++;
      if (model.size() == 4 && wr_valid && rd_ready) n_wr_rd_full++;
      if (rd_valid && model.size() != 0) check(rd_data == model[0], "rd_data order");
      @(posedge clk);
      if (rd_valid && rd_ready) void'(model.pop_front());
      if (wr_valid && wr_ready) model.push_back(wr_data);
    end
    check(n_full > 0 && n_wr_rd_full > 0, "full and write-while-full-with-read both exercised");
    $display("full cycles %0d, write+read when full %0d", n_full, n_wr_rd_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
