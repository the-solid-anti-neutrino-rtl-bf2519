// tb_timing_ctrl: checks that the time stamp counts one per clock, that a
// sync pulse (applied off the clock edge) zeroes it exactly three clocks after
// the first edge that sees it (two-flop synchroniser plus edge detector), that
// a held sync level acts once, and the synced flag and sync count.
module tb_timing_ctrl;
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
  logic sync_in, synced; ts_t ts; logic [31:0] n_sync;
  timing_ctrl dut (.clk, .rst, .sync_in, .ts, .synced, .n_sync);
  initial begin
    ts_t prev;
    sync_in = 0;
    @(posedge clk); #1; rst = 0;
    chk(!synced && ts == 0, "reset");
    for (int s = 0; s < 5; s++) begin
      int wait_n; wait_n = $urandom_range(10, 300);
      prev = ts;
      for (int i = 0; i < wait_n; i++) begin
        @(posedge clk); #1;
        chk(ts == prev + 1, "counts one per clock");
        prev = ts;
      end
      #2 sync_in = 1;                // off the edge
      @(posedge clk); #1;            // edge 1: first flop
      chk(ts == prev + 1, "no effect yet"); prev = ts;
      @(posedge clk); #1;            // edge 2: second flop
      chk(ts == prev + 1, "no effect yet"); prev = ts;
      @(posedge clk); #1;            // edge 3: edge detected, time stamp zeroed
      chk(ts == 0 && synced, "zeroed by sync");
      chk(n_sync == 32'(s + 1), "sync count");
      repeat (20) @(posedge clk);    // sync held high: no further action
      #1 chk(ts == 20, "held level acts once");
      sync_in = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
