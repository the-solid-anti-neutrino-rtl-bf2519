// tb_ro_seq: readout sequencer with 4 channels, PRE=100, POST=50. Checks the
// window arithmetic (including clamping at 0), the ro_req pulse, the event
// record, that the readout ends only when all channels are done and the record
// is taken, local-before-remote order, one pending request per source with the
// extra ones dropped and counted, and that back pressure holds the start.
module tb_ro_seq;
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
  trig_t lt, rt; logic bp, ro_req, rec_valid, rec_ready, busy; ro_window_t win; logic [3:0] cro_done;
  rec_t rec; logic [31:0] n_events, n_dropped;
  ro_seq #(.NCHAN(4), .PRE(100), .POST(50)) dut (.clk, .rst, .local_trig(lt), .remote_trig(rt), .bp,
    .ro_req, .win, .cro_done, .rec_valid, .rec, .rec_ready, .busy, .n_events, .n_dropped);
  task automatic step(); @(posedge clk); #1; endtask

  task automatic finish_readout();
    for (int c = 0; c < 4; c++) begin
      cro_done = 4'(1 << c); step(); cro_done = 0;
      if (c < 3) chk(busy, "busy until every channel is done");
    end
    step();
    chk(busy, "busy until the record is taken");
    rec_ready = 1; step(); rec_ready = 0; step();
    chk(!busy, "done");
  endtask

  initial begin
    lt = '0; rt = '0; bp = 0; cro_done = 0; rec_ready = 0;
    step(); rst = 0; step();
    // 1. local trigger
    lt = '{valid: 1, ttype: TT_NEUTRON, ts: 48'd1000}; step(); lt = '0;
    step();
    chk(ro_req && win.t_start == 48'd900 && win.t_end == 48'd1050, "window around the trigger");
    chk(rec_valid && rec.tag == REC_EVENT && rec.kind == TT_NEUTRON && rec.ts == 48'd1000, "event record");
    step(); chk(!ro_req, "ro_req is a pulse");
    // while busy: one local and one remote pend, a further local is dropped
    lt = '{valid: 1, ttype: TT_RANDOM, ts: 48'd2000}; rt = '{valid: 1, ttype: TT_REMOTE, ts: 48'd30}; step();
    lt = '{valid: 1, ttype: TT_RANDOM, ts: 48'd3000}; rt = '0; step(); lt = '0;
    chk(n_dropped == 32'd1, "extra local request dropped");
    finish_readout();
    // 2. pending local goes first
    step();
    chk(busy && win.t_start == 48'd1900 && rec.kind == TT_RANDOM, "pending local first");
    finish_readout();
    // 3. then the remote one, window clamped at 0
    step();
    chk(busy && win.t_start == 48'd0 && win.t_end == 48'd80 && rec.kind == TT_REMOTE, "remote, clamped window");
    finish_readout();
    // 4. back pressure holds the start
    bp = 1; lt = '{valid: 1, ttype: TT_NEUTRON, ts: 48'd5000}; step(); lt = '0;
    repeat (5) step();
    chk(!busy, "held by back pressure");
    bp = 0; step(); step();
    chk(busy && win.t_start == 48'd4900, "starts when back pressure drops");
    finish_readout();
    chk(n_events == 32'd4, "event count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
