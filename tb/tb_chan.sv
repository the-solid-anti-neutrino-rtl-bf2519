// tb_chan: one channel chain at reduced size (latency 64, window buffer 256,
// derandomiser 512, blocks of 16, trigger window 64). Scrambled ADC words carry
// a waveform of pedestal noise, sparse dark-count pulses and one neutron-like
// pulse train. The testbench forces non zero suppressed capture for LAT+BLK
// clocks, as the trigger does, and then requests the readout of a window
// around it. An independent model of the block selection (any sample above
// threshold, or inside the forced span) and of the window gives the expected
// derandomiser words, which are read back and compared; the channel trigger
// must fire on the pulse train and not before it.
module tb_chan;
  import solid_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  localparam int LAT = 64, BLK = 16, NS = 6000;
  localparam int THR = 1100, PED = 1000;
  localparam int F0 = 3000;                   // time stamp at which the capture is forced
  localparam int WA = 2700, WB = 3300;        // readout window
  localparam int TRAIN = 2000;                // neutron-like train start
  logic [13:0] raw; sample_t pb_sample; cfg_t cfg; ts_t ts; logic zs_force, ro_req, fire, cro_done, cro_busy;
  ro_window_t win; logic d_rd, d_valid, d_bp; word_t d_data;
  chan #(.LAT(LAT), .WDEPTH(256), .DDEPTH(512), .BLK(BLK), .TWIN(64), .CHAN_ID(6'd5)) dut (
    .clk, .rst, .raw, .pb_sample, .cfg, .ts, .zs_force, .ro_req, .win, .fire, .cro_done, .cro_busy,
    .d_rd, .d_data, .d_valid, .d_bp);

  int    smp [NS + 2];      // smp[t] = sample whose time stamp is t
  word_t exp [$];
  word_t got [$];
  int    first_fire = -1, nfire = 0;

  function automatic bit forced(int t); return (t + LAT >= F0 + 1) && (t + LAT < F0 + 1 + LAT + BLK); endfunction

  initial begin
    for (int t = 0; t < NS + 2; t++) smp[t] = PED + $urandom_range(0, 8);
    for (int t = 100; t < NS; t += 150 + $urandom_range(0, 200)) smp[t] += 300;   // dark counts
    for (int n = 0; n < 25; n++) smp[TRAIN + 8*n] += 60;                            // neutron-like train
    // expected words
    for (int b = 0; b + BLK <= NS; b += BLK) begin
      bit keep; keep = 0;
      for (int k = 0; k < BLK; k++) if (smp[b+k] > THR || forced(b+k)) keep = 1;
      if (keep && b + BLK - 1 >= WA && b <= WB) begin
        exp.push_back({W_BLKHDR, 30'(b)});
        for (int k = 0; k < BLK; k++) exp.push_back({W_SAMPLE, 6'd5, 10'd0, 14'(smp[b+k])});
      end
    end
    begin
      int nb; nb = 0;
      foreach (exp[i]) if (exp[i][31:30] == W_BLKHDR) nb++;
      exp.push_back({W_TRAILER, 6'd5, 8'd0, 16'(nb)});
    end
    cfg = '0; cfg.src = SRC_ADC; cfg.descr_en = 1; cfg.bitslip = 0; cfg.zs_en = 1; cfg.zs_thr = 14'(THR);
    cfg.pedestal = 14'(PED); cfg.peak_thr = 14'd30; cfg.npk_thr = 9'd5;
    pb_sample = 0; zs_force = 0; ro_req = 0; win = '0; d_rd = 0; ts = 0; raw = 0;
    @(posedge clk); #1; rst = 0;
    // after the edge that takes raw word k, the multiplexer shows sample k-1: give it time stamp k-1
    for (int k = 0; k < NS; k++) begin
      logic [13:0] s; int tc;
      s = 14'(smp[k]);
      raw = {s[13:1] ^ {13{s[0]}}, s[0]};
      @(posedge clk); #1;
      tc = k - 1;
      ts = ts_t'(tc);
      zs_force = (tc >= F0 + 1) && (tc < F0 + 1 + LAT + BLK);
      if (k == WB - 200) begin ro_req = 1; win = '{t_start: ts_t'(WA), t_end: ts_t'(WB)}; end
      else ro_req = 0;
      if (fire) begin nfire++; if (first_fire < 0) first_fire = k; end
      d_rd = d_valid;
      if (d_valid) got.push_back(d_data);
    end
    d_rd = 0;
    chk(got.size() == exp.size(), $sformatf("%0d words, expected %0d", got.size(), exp.size()));
    foreach (exp[i]) if (i < got.size()) chk(got[i] == exp[i], $sformatf("word %0d: %h vs %h", i, got[i], exp[i]));
    chk(nfire >= 1 && first_fire > TRAIN && first_fire < TRAIN + 300, $sformatf("channel trigger at %0d (%0d)", first_fire, nfire));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
