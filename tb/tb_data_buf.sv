// tb_data_buf: four channel sources each produce events (random numbers of
// data words ending with a trailer) at random moments; the merged stream read
// out with random gaps must be, per event, channel 0's words up to its trailer,
// then channel 1's, and so on, with nothing lost or reordered. A small data
// buffer (64 words) makes the merge stall on full and raise back pressure.
module tb_data_buf;
  import solid_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  localparam int NC = 4, NEV = 30;
  logic [NC-1:0] ch_valid, ch_rd; word_t ch_data [NC]; logic rd_en, valid, bp; word_t rdata; logic [31:0] n_words;
  data_buf #(.NCHAN(NC), .DEPTH(64)) dut (.clk, .rst, .ch_valid, .ch_data, .ch_rd, .rd_en, .rdata, .valid, .n_words, .bp);
  word_t src [NC][$];   // words each channel will present
  word_t exp [$];
  int    got = 0, saw_bp = 0;
  always_comb for (int c = 0; c < NC; c++) begin
    ch_valid[c] = src[c].size() > 0;
    ch_data[c]  = (src[c].size() > 0) ? src[c][0] : '0;
  end
  always @(posedge clk) if (!rst) begin
    for (int c = 0; c < NC; c++) if (ch_rd[c]) begin
      chk(src[c].size() > 0, "read from empty channel");
      void'(src[c].pop_front());
    end
  end
  initial begin
    word_t perch [NC][$];
    rd_en = 0;
    for (int e = 0; e < NEV; e++)
      for (int c = 0; c < NC; c++) begin
        int n; n = $urandom_range(0, 20);
        for (int i = 0; i < n; i++) perch[c].push_back({W_SAMPLE, 6'(c), 10'(e), 14'(i)});
        perch[c].push_back({W_TRAILER, 6'(c), 8'd0, 16'(e)});
      end
    for (int e = 0; e < NEV; e++) for (int c = 0; c < NC; c++) begin
      word_t w;
      do begin w = perch[c][0]; perch[c].delete(0); exp.push_back(w); perch[c].push_back(w); end
      while (w[31:30] != W_TRAILER);
    end
    @(posedge clk); #1; rst = 0;
    // feed each channel's words in random-sized chunks, read with random gaps
    for (int cyc = 0; cyc < 40000 && got < exp.size(); cyc++) begin
      for (int c = 0; c < NC; c++)
        if ($urandom_range(0, 3) == 0 && perch[c].size() > 0) begin
          word_t w; w = perch[c][0]; perch[c].delete(0); src[c].push_back(w);
        end
      rd_en = ($urandom_range(0, 2) == 0) && valid;
      if (rd_en) begin
        chk(rdata == exp[got], $sformatf("word %0d: %h vs %h", got, rdata, exp[got]));
        got++;
      end
      if (bp) saw_bp++;
      @(posedge clk); #1;
      rd_en = 0;
    end
    chk(got == exp.size(), $sformatf("read %0d of %0d words", got, exp.size()));
    chk(saw_bp > 0, "back pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
