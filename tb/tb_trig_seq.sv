// tb_trig_seq: trigger sequencer with 8 channels, LAT=64, BLK=16. Checks the
// neutron trigger (type, time stamp, record, zs_force held exactly LAT+BLK
// clocks), the veto while forcing, while the header buffer has not taken the
// record and while throttled, neutron priority over random, the neutron enable,
// random triggers firing when enabled, and the trigger and veto counters.
module tb_trig_seq;
  import solid_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  localparam int LAT = 64, BLK = 16;
  ts_t ts; logic [7:0] chan_fire; logic neutron_en, rand_en, throttle, rec_valid, rec_ready, zs_force;
  logic [31:0] rand_rate, n_trig, n_vetoed; trig_t trig; rec_t rec;
  trig_seq #(.NCHAN(8), .LAT(LAT), .BLK(BLK)) dut (.clk, .rst, .ts, .chan_fire, .neutron_en, .rand_en,
    .rand_rate, .throttle, .trig, .rec_valid, .rec, .rec_ready, .zs_force, .n_trig, .n_vetoed);
  always @(posedge clk) ts <= rst ? 48'd777 : ts + 1;
  int exp_trig = 0, exp_veto = 0;

  task automatic step(); @(posedge clk); #1; endtask

  initial begin
    chan_fire = 0; neutron_en = 1; rand_en = 0; rand_rate = 0; throttle = 0; rec_ready = 0;
    step(); rst = 0; step();
    for (int n = 0; n < 20; n++) begin
      ts_t t0; int force_len;
      chan_fire = 8'(1 << $urandom_range(0, 7)); rand_en = (n % 2); rand_rate = '1;
      t0 = ts;
      step(); chan_fire = 0; rand_en = 0;
      exp_trig++;
      chk(trig.valid && trig.ttype == TT_NEUTRON && trig.ts == t0, "neutron trigger with time stamp");
      chk(rec_valid && rec.tag == REC_TRIG && rec.kind == TT_NEUTRON && rec.ts == t0, "trigger record");
      force_len = 0;
      // record not taken: a second request is vetoed
      chan_fire = 8'h01; step(); chan_fire = 0; exp_veto++;
      chk(!trig.valid, "veto while busy");
      rec_ready = 1; step(); rec_ready = 0;
      chk(!rec_valid, "record taken");
      force_len = 2;
      while (zs_force) begin step(); force_len++; end
      chk(force_len == LAT + BLK, $sformatf("zs_force held %0d clocks", force_len));
      // throttle vetoes
      throttle = 1; chan_fire = 8'h80; step(); chan_fire = 0; throttle = 0; exp_veto++;
      chk(!trig.valid, "veto while throttled");
      step();
    end
    // random triggers
    rand_en = 1; rand_rate = 32'h1000_0000; neutron_en = 0; rec_ready = 1;
    begin
      int nr; nr = 0;
      for (int i = 0; i < 5000; i++) begin
        chan_fire = 8'($urandom);       // ignored: neutron disabled
        step();
        if (trig.valid) begin
          nr++; chk(trig.ttype == TT_RANDOM, "random type");
        end
      end
      chk(nr > 10, $sformatf("random triggers: %0d", nr));
      exp_trig += nr;
    end
    chk(n_trig == 32'(exp_trig), $sformatf("trigger count %0d vs %0d", n_trig, exp_trig));
    chk(n_vetoed >= 32'(exp_veto), "veto count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
