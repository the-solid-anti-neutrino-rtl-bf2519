// tb_chan_trig: drives a waveform of noise, single EM-like pulses and
// neutron-like trains of many small pulses through the peak-counting trigger,
// and checks the rolling peak count and every fire pulse, clock by clock,
// against an independent model: a peak is a sample above pedestal+peak_thr that
// is higher than the previous sample and not lower than the next; the count
// covers the last 256 clocks; fire pulses once per crossing of npk_thr.
module tb_chan_trig;
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
  localparam int WIN = 256, NS = 20000;
  localparam logic [13:0] PED = 14'd1000, PTHR = 14'd20;
  localparam logic [8:0]  NPK = 9'd10;
  logic [13:0] din; logic fire; logic [8:0] npeaks;
  chan_trig #(.WIN(WIN)) dut (.clk, .rst, .din, .din_valid(1'b1), .pedestal(PED), .peak_thr(PTHR),
    .npk_thr(NPK), .fire, .npeaks);

  int  s [NS];
  bit  pk [NS];      // peak flag of sample i
  int  cnt [NS];     // model count after edge i
  int  nfire = 0, nexp = 0;

  initial begin
    // waveform: pedestal + noise, EM pulses (one big peak) and neutron trains
    for (int i = 0; i < NS; i++) s[i] = int'(PED) + $urandom_range(0, 6) - 3;
    for (int i = 0; i < 6; i++) s[i] = int'(PED);
    for (int p = 300; p < NS - 600; p += 700) begin
      if ((p / 700) % 2 == 0) begin                    // EM: one fast pulse
        for (int k = 0; k < 8; k++) s[p+k] += 400 >> k;
      end else begin                                   // neutron: ~20 pulses over 200 samples
        for (int n = 0; n < 20; n++) begin
          int a; a = p + n * 10 + $urandom_range(0, 3);
          s[a] += 60; s[a+1] += 30;
        end
      end
    end
    foreach (pk[i]) pk[i] = 0;
    for (int i = 1; i < NS - 1; i++)
      pk[i] = (s[i] > s[i-1]) && (s[i+1] <= s[i]) && (s[i] - int'(PED) > int'(PTHR));
    // after edge k the DUT has counted the peaks of samples k-WIN-1 .. k-2
    for (int k = 0; k < NS; k++) begin
      cnt[k] = 0;
      for (int j = k - WIN - 1; j <= k - 2; j++) if (j >= 0) cnt[k] += pk[j];
    end
    din = PED;
    @(posedge clk); #1; rst = 0;
    begin
      bit armed; armed = 1;
      for (int k = 0; k < NS; k++) begin
        bit fexp;
        din = 14'(s[k]);
        @(posedge clk); #1;
        chk(int'(npeaks) == cnt[k], $sformatf("count after sample %0d: %0d vs %0d", k, npeaks, cnt[k]));
        fexp = (k > 0) && (cnt[k-1] >= int'(NPK)) && armed;
        if (k > 0) armed = !(cnt[k-1] >= int'(NPK));
        chk(fire == fexp, $sformatf("fire at %0d", k));
        nfire += fire; nexp += fexp;
      end
    end
    chk(nfire > 5, "neutron trains fire the trigger");
    $display("fires: %0d", nfire);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
