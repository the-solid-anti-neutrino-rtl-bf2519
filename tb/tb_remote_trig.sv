// tb_remote_trig: checks that local neutron triggers (and not random ones)
// are sent on both links with their time stamp, and that neighbour trigger
// words become TT_REMOTE readout requests: one per distinct time stamp, the
// second of two different words waiting a clock, identical words merged,
// disabled links ignored, and the lost count when the holding register is busy.
module tb_remote_trig;
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
  trig_t local_trig, remote; logic [1:0] rx_en; link_word_t tx [2]; link_word_t rx [2];
  logic [31:0] n_rx, n_lost;
  remote_trig dut (.clk, .rst, .local_trig, .rx_en, .tx, .rx, .remote, .n_rx, .n_lost);
  task automatic step(); @(posedge clk); #1; endtask
  function automatic link_word_t lw(ts_t t); return '{marker: LINK_TRIG, spare: '0, ts: t}; endfunction
  initial begin
    local_trig = '0; rx[0] = '0; rx[1] = '0; rx_en = 2'b11;
    step(); rst = 0;
    // transmit
    local_trig = '{valid: 1, ttype: TT_NEUTRON, ts: 48'd12345}; step(); local_trig = '0;
    chk(tx[0] == lw(48'd12345) && tx[1] == lw(48'd12345), "neutron trigger sent to both neighbours");
    step(); chk(tx[0] == '0 && tx[1] == '0, "links idle");
    local_trig = '{valid: 1, ttype: TT_RANDOM, ts: 48'd999}; step(); local_trig = '0;
    chk(tx[0] == '0 && tx[1] == '0, "random trigger not sent");
    // single receive on each link
    rx[0] = lw(48'd500); step(); rx[0] = '0;
    chk(remote.valid && remote.ttype == TT_REMOTE && remote.ts == 48'd500, "link 0 request");
    rx[1] = lw(48'd600); step(); rx[1] = '0;
    chk(remote.valid && remote.ts == 48'd600, "link 1 request");
    step(); chk(!remote.valid, "single pulse");
    // both, same time stamp: merged
    rx[0] = lw(48'd700); rx[1] = lw(48'd700); step(); rx[0] = '0; rx[1] = '0;
    chk(remote.valid && remote.ts == 48'd700, "merged request");
    step(); chk(!remote.valid, "merged: only one");
    // both, different: second a clock later
    rx[0] = lw(48'd800); rx[1] = lw(48'd801); step(); rx[0] = '0; rx[1] = '0;
    chk(remote.valid && remote.ts == 48'd800, "first of two");
    step(); chk(remote.valid && remote.ts == 48'd801, "second of two");
    step(); chk(!remote.valid, "then idle");
    // holding register busy: third lost
    rx[0] = lw(48'd900); rx[1] = lw(48'd901); step();
    rx[0] = lw(48'd902); rx[1] = lw(48'd903); step(); rx[0] = '0; rx[1] = '0;
    chk(remote.valid && remote.ts == 48'd902, "link 0 first");
    chk(n_lost == 32'd1, "one lost");
    step(); chk(remote.valid && remote.ts == 48'd901, "held request");
    // disabled link
    rx_en = 2'b01; rx[1] = lw(48'd1000); step(); rx[1] = '0;
    chk(!remote.valid, "disabled link ignored");
    chk(n_rx == 32'd10, $sformatf("received count %0d", n_rx));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
