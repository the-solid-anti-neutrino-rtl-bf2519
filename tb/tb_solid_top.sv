// tb_solid_top: end-to-end test of the plane readout, by default at reduced
// size (4 channels, latency 64, window buffer 256, derandomiser 512, readout
// window -300/+300, small header and data buffers); FULL=1 runs the same
// scenario on solid_top with every parameter at its default.
// Each channel gets scrambled ADC words of pedestal noise and sparse dark
// counts; neutron-like pulse trains are placed in chosen channels. Over IPbus
// the testbench configures the plane and reads the header and data buffers
// continuously, except in one phase where it stops reading so that the
// buffers fill. The scenario makes happen, and counts:
//   local neutron triggers, random triggers, remote triggers from a
//   neighbour link, trigger words sent to the neighbours, forced non zero
//   suppressed capture, window buffer overwrites, derandomiser back pressure
//   stalling the readout, buffer back pressure vetoing triggers, the pattern
//   and playback sources, and a sync.
// Every data word read is checked: events come channel by channel with one
// trailer each, block counts match, every block lies inside its event's window
// and every sample equals what was fed in at that time stamp.
module tb_solid_top;
  import solid_pkg::*;
  parameter bit FULL = 0;
  localparam int NC    = FULL ? 64 : 4;
  localparam int LAT   = FULL ? 512 : 64;
  localparam int BLK   = 16;
  localparam int PRE   = FULL ? 20000 : 300;
  localparam int POST  = FULL ? 20000 : 300;
  localparam int THR = 1100, PED = 1000;
  // one dark count per DARK samples: lower at full size, where the readout
  // window is 40001 samples, to keep events to a size that reads out quickly
  localparam int DARK  = FULL ? 5000 : 200;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (FULL ? 20000000 : 400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic sync_in; logic [13:0] adc_raw [NC]; ipb_wbus_t ipb_w; ipb_rbus_t ipb_r;
  link_word_t link_tx [2]; link_word_t link_rx [2];
  ts_t dut_ts; logic dut_force, dut_bp; logic [31:0] dut_ovw;

  if (FULL) begin : g_full
    solid_top dut (.clk, .rst, .sync_in, .adc_raw, .ipb_w, .ipb_r, .link_tx, .link_rx);
    assign dut_ts    = dut.ts;
    assign dut_force = dut.zs_force;
    assign dut_bp    = |dut.d_bp;
    assign dut_ovw   = dut.g_chan[0].u_chan.u_win.n_overwritten;
  end else begin : g_small
    solid_top #(.NCHAN(NC), .LAT(LAT), .WDEPTH(256), .DDEPTH(512), .BLK(BLK), .TWIN(64), .PRE(PRE),
                .POST(POST), .HDEPTH(32), .DBDEPTH(1024)) dut (
      .clk, .rst, .sync_in, .adc_raw, .ipb_w, .ipb_r, .link_tx, .link_rx);
    assign dut_ts    = dut.ts;
    assign dut_force = dut.zs_force;
    assign dut_bp    = |dut.d_bp;
    assign dut_ovw   = dut.g_chan[0].u_chan.u_win.n_overwritten;
  end

  // ---------------- stimulus: waveforms -----------------
  int  cyc = 0;                 // clock counter of the stimulus
  // The ADC value of channel c at time stamp t is a hash of (c, t), so the
  // expected value of any sample read back is recomputed, not stored.
  // Source changes are kept as a short list of (first time stamp, source).
  typedef enum int {M_ADC, M_SETTLE, M_PAT, M_PB} mode_e;
  int    mode_ts [$];
  mode_e mode_v [$];
  int  train_at [$];            // time stamp at which a neutron-like train starts
  int  train_ch [$];
  bit  pattern_on = 0, playback_on = 0;
  bit  cfg_done = 0;             // samples before the first configuration are not checked
  int  settle = 0;              // clocks left in which a source switch is in progress (samples not checked)
  ts_t ts_mirror;

  function automatic logic [31:0] mix(int c, int t);
    logic [31:0] x;
    x = (32'(t) * 32'h9E3779B1) ^ (32'(c) * 32'h85EBCA77);
    x ^= x >> 15; x *= 32'h2C1B3C6D; x ^= x >> 12; x *= 32'h297A2D39; x ^= x >> 15;
    return x;
  endfunction

  function automatic int next_sample(int c, int k);
    logic [31:0] h;
    int v;
    h = mix(c, k);
    v = PED + int'(h[7:0] % 9);
    if (h[31:16] % DARK == 0) v += 300;                             // dark count
    foreach (train_at[i])
      if (train_ch[i] == c && k >= train_at[i] && k < train_at[i] + 200 && (k - train_at[i]) % 8 == 0) v += 60;
    return v;
  endfunction

  function automatic int expected(int c, int t);
    mode_e m = M_SETTLE;
    foreach (mode_ts[i]) if (mode_ts[i] <= t) m = mode_v[i];
    case (m)
      M_SETTLE: return -3;
      M_PAT:    return 3000;
      M_PB:     return -1;
      default:  return next_sample(c, t);
    endcase
  endfunction

  // ---------------- IPbus -----------------
  task automatic ipb(bit wr, int addr, logic [31:0] wdata, output logic [31:0] rdata);
    ipb_w = '{addr: 32'(addr), wdata: wdata, strobe: 1'b1, write: wr};
    @(posedge clk); #1;
    ipb_w.strobe = 1'b0;
    rdata = ipb_r.rdata;
    if (!ipb_r.ack) begin failures++; $display("FAIL: no IPbus ack at %h", addr); end
    @(posedge clk); #1;
  endtask

  // ---------------- counters of mechanisms -----------------
  int n_neutron = 0, n_random = 0, n_remote = 0, n_tx = 0, n_force = 0, n_bp = 0, n_throttle_veto = 0;
  int n_pattern_words = 0, n_playback_words = 0, n_events_read = 0, n_blocks_read = 0;
  int n_overwrite = 0;

  // ---------------- readout parser -----------------
  typedef struct { ts_t ts; logic [1:0] kind; } ev_t;
  ev_t   events [$];
  int    cur_ch = 0, cur_nblk = 0, blk_pos = -1;
  ts_t   blk_ts;
  int    ev_idx = 0;
  logic [31:0] hdr_hi; bit hdr_half = 0;
  int    pb_vals [4] = '{2222, 3333, 4444, 5555};

  task automatic take_header(logic [31:0] w);
    logic [63:0] r;
    if (!hdr_half) begin hdr_hi = w; hdr_half = 1; return; end
    hdr_half = 0;
    r = {hdr_hi, w};
    if (r[63:60] == REC_EVENT) begin
      events.push_back('{ts: r[47:0], kind: r[59:58]});
      case (r[59:58]) 2'(TT_NEUTRON): n_neutron++; 2'(TT_RANDOM): n_random++; 2'(TT_REMOTE): n_remote++; default: ; endcase
    end else chk(r[63:60] == REC_TRIG, "header record tag");
  endtask

  task automatic take_data(logic [31:0] w);
    ev_t ev;
    int  want, t;
    bit  isp;
    chk(ev_idx < events.size(), "data word has an event record");
    if (ev_idx < events.size()) ev = events[ev_idx]; else ev = '{ts: '0, kind: '0};
    unique case (w[31:30])
      W_BLKHDR: begin
        chk(blk_pos < 0 || blk_pos == BLK, "block complete before next header");
        blk_ts = ts_t'(w[29:0]); blk_pos = 0; cur_nblk++; n_blocks_read++;
        chk(blk_ts + BLK - 1 >= ((ev.ts > PRE) ? ev.ts - PRE : 0) && blk_ts <= ev.ts + POST, "block inside window");
        chk(blk_ts % BLK == 0, "block aligned");
      end
      W_SAMPLE: begin
        chk(int'(w[29:24]) == cur_ch, $sformatf("sample channel %0d, expected %0d", w[29:24], cur_ch));
        chk(blk_pos >= 0 && blk_pos < BLK, "sample inside a block");
        t = int'(blk_ts) + blk_pos;
        want = expected(cur_ch, t);
        if (want == 3000) n_pattern_words++;
        if (want == -3) ;
        else if (want == -1) begin
          isp = 0;
          foreach (pb_vals[i]) if (int'(w[13:0]) == pb_vals[i]) isp = 1;
          chk(isp, $sformatf("ch %0d t %0d: playback value %0d", cur_ch, t, w[13:0]));
          n_playback_words++;
        end else begin
          chk(int'(w[13:0]) == want, $sformatf("ch %0d t %0d: sample %0d expected %0d", cur_ch, t, w[13:0], want));
        end
        blk_pos++;
      end
      W_TRAILER: begin
        chk(int'(w[29:24]) == cur_ch, "trailer channel");
        chk(int'(w[15:0]) == cur_nblk, $sformatf("trailer block count %0d vs %0d", w[15:0], cur_nblk));
        chk(blk_pos < 0 || blk_pos == BLK, "last block complete");
        cur_nblk = 0; blk_pos = -1;
        cur_ch++;
        if (cur_ch == NC) begin cur_ch = 0; ev_idx++; n_events_read++; end
      end
      default: chk(0, "word kind");
    endcase
  endtask

  task automatic poll(output int nread);
    logic [31:0] n, d;
    nread = 0;
    ipb(0, 'h10, 0, n);
    for (int i = 0; i < int'(n) && i < 8; i++) begin ipb(0, 'h11, 0, d); take_header(d); nread++; end
    ipb(0, 'h12, 0, n);
    for (int i = 0; i < int'(n) && i < 64; i++) begin ipb(0, 'h13, 0, d); take_data(d); nread++; end
  endtask

  task automatic poll_or_wait(int i);
    int nr;
    if (i % 16 == 0) poll(nr); else begin @(posedge clk); #1; end
  endtask

  task automatic idle(int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  // ---------------- clocked stimulus -----------------
  // A sample driven on adc_raw after this edge is stamped with ts+2 by the
  // plane (one clock in this process, one in the deserialiser), so the value
  // recorded here (driven on the previous clock) belongs to ts+1.
  assign ts_mirror = dut_ts + 1;

  always @(posedge clk) begin
    if (!rst) begin
      #1;
      for (int c = 0; c < NC; c++) begin
        logic [13:0] v;
        v = 14'(next_sample(c, int'(ts_mirror) + 1));
        adc_raw[c] = {v[13:1] ^ {13{v[0]}}, v[0]};   // the ADC's output randomiser
      end
      begin
        mode_e m;
        m = (!cfg_done || settle > 0) ? M_SETTLE : pattern_on ? M_PAT : playback_on ? M_PB : M_ADC;
        if (mode_v.size() == 0 || mode_v[$] != m) begin mode_ts.push_back(int'(ts_mirror)); mode_v.push_back(m); end
      end
      if (link_tx[0].marker == LINK_TRIG && link_tx[1].marker == LINK_TRIG) n_tx++;
      if (dut_force) n_force++;
      if (dut_bp) n_bp++;
      if (settle > 0) settle--;
      cyc++;
    end
  end

  localparam logic [31:0] CSR_ADC = (1 << 2) | (1 << 7) | (1 << 9) | (3 << 10);  // ADC, descramble, ZS, neutron, remote

  initial begin
    logic [31:0] d, nveto0, nveto1;
    sync_in = 0; ipb_w = '0; link_rx[0] = '0; link_rx[1] = '0;
    foreach (adc_raw[c]) adc_raw[c] = '0;
    idle(3); rst = 0;
    // sync: the time stamp restarts at 0
    sync_in = 1; idle(4); sync_in = 0;
    ipb(0, 'h1A, 0, d); chk(d == 1, "one sync seen");
    ipb(1, 'h01, THR, d);
    ipb(1, 'h03, PED, d);
    ipb(1, 'h04, (5 << 16) | 30, d);
    ipb(1, 'h00, CSR_ADC, d);
    settle = 8; cfg_done = 1;
    // 1. a neutron-like train in channel 1
    train_at.push_back(int'(ts_mirror) + 2 * LAT + 500); train_ch.push_back(1 % NC);
    for (int i = 0; i < (FULL ? 60000 : 3000); i++) poll_or_wait(i);
    // 2. a trigger from the neighbour on link 0
    link_rx[0] = '{marker: LINK_TRIG, spare: '0, ts: ts_mirror - 48'(LAT)}; idle(1); link_rx[0] = '0;
    for (int i = 0; i < (FULL ? 50000 : 1500); i++) poll_or_wait(i);
    // 3. pattern source (constant 3000, above threshold) and a random trigger
    ipb(1, 'h05, 3000, d);
    settle = 8; ipb(1, 'h00, (2 << 0) | (1 << 12) | (1 << 7) | (1 << 9) | (3 << 10), d);
    pattern_on = 1;
    idle(LAT + 100);
    ipb(1, 'h02, 32'hFFFF_FFFF, d);
    ipb(1, 'h00, (2 << 0) | (1 << 12) | (1 << 7) | (1 << 8) | (1 << 9) | (3 << 10), d);
    ipb(1, 'h00, (2 << 0) | (1 << 12) | (1 << 7) | (1 << 9) | (3 << 10), d);
    idle(LAT + 100);
    // 4. playback source
    for (int a = 0; a < 4; a++) ipb(1, 'h07, (a << 16) | pb_vals[a], d);
    ipb(1, 'h06, 3, d);
    settle = 8; ipb(1, 'h00, (1 << 0) | (1 << 13) | (1 << 7) | (1 << 9) | (3 << 10), d);
    pattern_on = 0; playback_on = 1;
    idle(LAT + 100);
    settle = 8; ipb(1, 'h00, CSR_ADC | (1 << 8), d);      // ADC again, random on
    playback_on = 0;
    ipb(1, 'h00, CSR_ADC, d);
    for (int i = 0; i < (FULL ? 50000 : 1500); i++) poll_or_wait(i);
    // 5. no suppression and no reading: the buffers fill, the readout stalls,
    //    and triggers arriving then are vetoed
    ipb(1, 'h00, CSR_ADC & ~(32'(1) << 7), d);
    ipb(0, 'h1C, 0, nveto0);
    train_at.push_back(int'(ts_mirror) + 50); train_ch.push_back(0);
    idle(FULL ? 2000 : 1200);
    ipb(1, 'h00, CSR_ADC, d);
    idle(POST + LAT + 300);
    ipb(1, 'h02, 32'h0100_0000, d);
    ipb(1, 'h00, CSR_ADC | (1 << 8), d);      // random triggers while throttled
    idle(2000);
    ipb(1, 'h00, CSR_ADC, d);
    ipb(0, 'h1C, 0, nveto1);
    n_throttle_veto = int'(nveto1 - nveto0);
    // drain everything
    // drain: until nothing has arrived for longer than a readout can take to start
    begin
      int quiet, nr;
      quiet = 0;
      while (quiet < 4 * (POST + LAT + 500)) begin
        poll(nr);
        quiet = (nr == 0) ? quiet + 10 : 0;
      end
    end
    ipb(0, 'h15, 0, d); chk(d > 0, "deadtime: throttled cycles counted");
    ipb(0, 'h16, 0, d); chk(d > 0, "deadtime: busy cycles counted");
    ipb(0, 'h17, 0, d); chk(d > 0, "deadtime: back-pressure cycles counted");
    ipb(0, 'h1D, 0, d); chk(int'(d) == n_events_read, $sformatf("events %0d read %0d", d, n_events_read));
    n_overwrite = int'(dut_ovw);
    chk(n_neutron > 0,        $sformatf("neutron triggers read out: %0d", n_neutron));
    chk(n_random > 0,         $sformatf("random triggers read out: %0d", n_random));
    chk(n_remote > 0,         $sformatf("remote triggers read out: %0d", n_remote));
    chk(n_tx > 0,             $sformatf("triggers sent to neighbours: %0d", n_tx));
    chk(n_force > 0,          $sformatf("forced capture cycles: %0d", n_force));
    chk(n_bp > 0,             $sformatf("derandomiser back-pressure cycles: %0d", n_bp));
    chk(n_throttle_veto > 0,  $sformatf("triggers vetoed by back pressure: %0d", n_throttle_veto));
    chk(n_pattern_words > 0,  $sformatf("pattern samples read: %0d", n_pattern_words));
    chk(n_playback_words > 0, $sformatf("playback samples read: %0d", n_playback_words));
    chk(n_overwrite > 0,      $sformatf("window buffer overwrites: %0d", n_overwrite));
    chk(n_events_read == events.size() && cur_ch == 0 && n_events_read >= 4,
        $sformatf("events complete: %0d of %0d", n_events_read, events.size()));
    $display("events %0d (neutron %0d random %0d remote %0d), blocks %0d, tx %0d, force %0d, bp %0d, vetoed %0d, pattern %0d, playback %0d, overwrites %0d",
             n_events_read, n_neutron, n_random, n_remote, n_blocks_read, n_tx, n_force, n_bp, n_throttle_veto,
             n_pattern_words, n_playback_words, n_overwrite);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
