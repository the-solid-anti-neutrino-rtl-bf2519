// tb_derand: a full-size (2048-word) derandomiser with random writes and
// reads against a queue model: data order, valid, full (writes refused), the
// back-pressure flag at DEPTH-64 and the high-water mark.
module tb_derand;
  import solid_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  localparam int D = 2048;
  logic wr_en, full, rd_en, valid, bp; word_t wdata, rdata; logic [11:0] count, hwm;
  derand #(.DEPTH(D)) dut (.clk, .rst, .wr_en, .wdata, .full, .rd_en, .rdata, .valid, .bp, .count, .hwm);
  word_t q [$];
  int    maxq = 0, saw_full = 0, saw_bp = 0;
  initial begin
    wr_en = 0; rd_en = 0; wdata = 0;
    @(posedge clk); #1; rst = 0;
    for (int ph = 0; ph < 4; ph++) begin
      for (int i = 0; i < 6000; i++) begin
        int pw; pw = (ph % 2 == 0) ? 8 : 2;   // fill phases, then drain phases
        wr_en = ($urandom_range(0, 9) < pw); rd_en = ($urandom_range(0, 9) < 10 - pw);
        wdata = $urandom;
        #0;
        chk(valid == (q.size() > 0), "valid");
        chk(full == (q.size() == D), "full");
        chk(bp == (q.size() > D - 64), "back pressure");
        if (q.size() > 0) chk(rdata == q[0], "head data");
        if (full) saw_full++;
        if (bp) saw_bp++;
        @(posedge clk);
        if (rd_en && valid) void'(q.pop_front());
        if (wr_en && !full) q.push_back(wdata);
        if (q.size() > maxq) maxq = q.size();
        #1;
      end
    end
    chk(saw_full > 0 && saw_bp > 0, "full and back pressure reached");
    chk(int'(hwm) >= maxq - 1 && int'(hwm) <= maxq, $sformatf("high-water mark %0d vs %0d", hwm, maxq));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
