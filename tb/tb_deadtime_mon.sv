// tb_deadtime_mon: drives random throttle / busy / back-pressure patterns and
// checks the four cycle counters against counts kept by the testbench, the
// clear input, and saturation at 2^32-1 (by forcing a counter near the top).
module tb_deadtime_mon;
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
  logic clear, thr, busy, bp; logic [31:0] nt, nthr, nbusy, nbp;
  deadtime_mon dut (.clk, .rst, .clear, .throttle(thr), .ro_busy(busy), .derand_bp(bp),
    .n_total(nt), .n_throttle(nthr), .n_busy(nbusy), .n_bp(nbp));
  int et, ethr, ebusy, ebp;
  initial begin
    clear = 0; thr = 0; busy = 0; bp = 0;
    @(posedge clk); #1; rst = 0;
    for (int ph = 0; ph < 3; ph++) begin
      et = 0; ethr = 0; ebusy = 0; ebp = 0;
      for (int i = 0; i < 3000; i++) begin
        thr = 1'($urandom); busy = ($urandom_range(0, 3) == 0); bp = ($urandom_range(0, 9) == 0);
        @(posedge clk); #1;
        et++; ethr += thr; ebusy += busy; ebp += bp;
        chk(nt == 32'(et) && nthr == 32'(ethr) && nbusy == 32'(ebusy) && nbp == 32'(ebp), $sformatf("counts at %0d", i));
      end
      clear = 1; @(posedge clk); #1; clear = 0;
      chk(nt == 0 && nthr == 0 && nbusy == 0 && nbp == 0, "clear");
    end
    // saturation: let the total counter run from just below the top
    @(posedge clk);
    dut.n_total = 32'hFFFF_FFFE;
    #1;
    repeat (4) @(posedge clk);
    #1 chk(nt == 32'hFFFF_FFFF, "saturates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
