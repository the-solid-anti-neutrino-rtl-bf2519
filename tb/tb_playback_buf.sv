// tb_playback_buf: loads a random waveform, plays it in a loop of length 37
// and checks every output sample against the loaded table, then checks the
// rewind when 'run' drops.
module tb_playback_buf;
  import solid_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic wr_en, run; logic [7:0] wr_addr, len; logic [13:0] wr_data, sample;
  logic [13:0] tbl [256];
  playback_buf dut (.clk, .rst, .wr_en, .wr_addr, .wr_data, .run, .len, .sample);
  initial begin
    wr_en = 0; run = 0; len = 8'd36; wr_addr = 0; wr_data = 0;
    @(posedge clk); #1; rst = 0;
    for (int a = 0; a < 256; a++) begin
      tbl[a] = 14'($urandom);
      wr_en = 1; wr_addr = 8'(a); wr_data = tbl[a];
      @(posedge clk); #1;
    end
    wr_en = 0;
    @(posedge clk); #1;
    run = 1;
    for (int i = 0; i < 200; i++) begin
      @(posedge clk); #1;
      chk(sample == tbl[i % 37], $sformatf("play %0d: %h vs %h", i, sample, tbl[i % 37]));
    end
    run = 0;
    @(posedge clk); #1; @(posedge clk); #1;
    chk(sample == tbl[0], "rewind");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
