// tb_pattern_gen: checks the ramp (one count per clock, wrapping at 2^14)
// and the constant pattern of pattern_gen.
module tb_pattern_gen;
  import solid_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic mode; logic [13:0] value, sample, prev;
  pattern_gen dut (.clk, .rst, .mode, .value, .sample);
  initial begin
    mode = 0; value = 14'h1234;
    @(posedge clk); #1; rst = 0;
    @(posedge clk); #1; prev = sample;
    for (int i = 0; i < 17000; i++) begin
      @(posedge clk); #1;
      chk(sample == prev + 14'd1, $sformatf("ramp at %0d: %h after %h", i, sample, prev));
      prev = sample;
    end
    mode = 1;
    @(posedge clk); #1;
    for (int i = 0; i < 10; i++) begin
      value = 14'($urandom);
      @(posedge clk); #1;
      chk(sample == value, "constant");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
