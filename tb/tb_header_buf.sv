// tb_header_buf: records offered on both inputs (often in the same clock)
// must all arrive, input 0 first when both are valid, each read as its high
// word then its low word; also checks the word count, the ready handshake and
// back pressure with a 32-record buffer filled to the brim.
module tb_header_buf;
  import solid_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [1:0] rec_valid, rec_ready; rec_t rec [2]; logic rd_en, valid, bp; word_t rdata; logic [31:0] n_words;
  header_buf #(.DEPTH(32)) dut (.clk, .rst, .rec_valid, .rec, .rec_ready, .rd_en, .rdata, .valid, .n_words, .bp);
  logic [63:0] q [$];
  task automatic step(); @(posedge clk); #1; endtask
  initial begin
    rec_valid = 0; rd_en = 0; rec[0] = '0; rec[1] = '0;
    step(); rst = 0;
    for (int round = 0; round < 20; round++) begin
      // offer until full
      int guard; guard = 0;
      while (guard < 200) begin
        rec_valid = 2'($urandom_range(1, 3));
        rec[0] = {REC_TRIG, 2'd1, 10'd0, 48'($urandom)};
        rec[1] = {REC_EVENT, 2'd2, 10'd0, 48'($urandom)};
        #0;
        if (rec_valid[0]) chk(rec_ready[0] == (q.size() < 32), "ready 0");
        if (rec_valid == 2'b11) chk(!rec_ready[1], "input 0 has priority");
        if (rec_valid[0] && rec_ready[0]) q.push_back(rec[0]);
        else if (rec_valid[1] && rec_ready[1]) q.push_back(rec[1]);
        step();
        guard++;
        if (q.size() == 32) break;
      end
      rec_valid = 0;
      chk(bp, "back pressure when nearly full");
      chk(n_words == 32'(2 * q.size()), "word count");
      // drain
      while (q.size() > 0) begin
        logic [63:0] r; r = q.pop_front();
        chk(valid && rdata == r[63:32], "high word");
        rd_en = 1; step();
        chk(valid && rdata == r[31:0], "low word");
        chk(n_words == 32'(2 * q.size() + 1), "odd word count");
        step(); rd_en = 0;
      end
      chk(!valid && !bp, "empty");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
