// tb_rand_trig: runs its own model of the 32-bit Galois LFSR alongside the
// random trigger and checks every clock's decision for several rates, that
// rate 0 never fires and that disabling stops it; it also checks that the
// observed firing fraction is near rate/2^32.
module tb_rand_trig;
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
  logic en, fire; logic [31:0] rate, m;
  rand_trig dut (.clk, .rst, .en, .rate, .fire);
  logic [31:0] rates [4] = '{32'd0, 32'h0100_0000, 32'h4000_0000, 32'hC000_0000};
  initial begin
    en = 1; rate = 0;
    for (int r = 0; r < 4; r++) begin
      int n; n = 0;
      rate = rates[r];
      rst = 1; @(posedge clk); #1; rst = 0; m = 32'h1;
      for (int i = 0; i < 20000; i++) begin
        bit want; want = en && (m < rate);
        m = m[0] ? ((m >> 1) ^ 32'h8020_0003) : (m >> 1);
        @(posedge clk); #1;
        chk(fire == want, $sformatf("rate %h clock %0d", rate, i));
        n += fire;
      end
      chk((real'(n) / 20000.0 - real'(rate) / 4294967296.0) < 0.02 &&
          (real'(rate) / 4294967296.0 - real'(n) / 20000.0) < 0.02, $sformatf("fraction %0d/20000", n));
    end
    en = 0; @(posedge clk); #1; @(posedge clk); #1;
    chk(!fire, "disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
