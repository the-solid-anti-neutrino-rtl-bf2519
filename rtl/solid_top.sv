// solid_top: readout firmware of one 64-channel SoLid detector plane.
// 64 channel chains (chan) digitise-align, delay, zero-suppress and buffer
// their samples, and look for neutron-like pulse trains. The trigger block
// (trig_seq) turns channel triggers or random triggers into time-stamped
// triggers; local neutron triggers are also sent to the two neighbouring
// planes (remote_trig), whose triggers come back as readout requests. The
// readout sequencer (ro_seq) asks every channel to copy the blocks inside a
// window around the trigger time into its derandomiser; the data buffer merges
// them channel by channel and the header buffer collects trigger and event
// records; both are read through the IPbus register block (ctrl_regs). The
// timing controller keeps the time stamp shared with the other planes, and the
// deadtime monitor counts cycles lost to back pressure and readout.
// Ports: 'adc_raw' is one sample period of bits per channel from the I/O
// serialisers, 'link_tx'/'link_rx' the parallel words of the two trigger link
// transceivers, 'ipb_w'/'ipb_r' the IPbus slave bus; the transceivers, the
// IPbus/Ethernet engine and the ADCs are outside this design. Single 40 MHz
// clock, synchronous active-high reset.
module solid_top
  import solid_pkg::*;
#(
  parameter int NCHAN  = 64,
  parameter int LAT    = 512,
  parameter int WDEPTH = 1536,
  parameter int DDEPTH = 2048,
  parameter int BLK    = 16,
  parameter int TWIN   = 256,
  parameter int PRE    = 20000,
  parameter int POST   = 20000,
  parameter int HDEPTH = 512,
  parameter int DBDEPTH = 8192
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                sync_in,
  input  logic [SAMPLE_W-1:0] adc_raw [NCHAN],
  input  ipb_wbus_t           ipb_w,
  output ipb_rbus_t           ipb_r,
  output link_word_t          link_tx [2],
  input  link_word_t          link_rx [2]
);
  cfg_t             cfg;
  stat_t            stat;
  ts_t              ts;
  logic             synced, dt_clear, pb_wr;
  logic [7:0]       pb_addr;
  sample_t          pb_wdata, pb_sample;
  logic [NCHAN-1:0] fire, cro_done, cro_busy, d_rd, d_valid, d_bp;
  word_t            d_data [NCHAN];
  logic             zs_force, ro_req, throttle, hdr_bp, data_bp, ro_busy;
  ro_window_t       win;
  trig_t            ltrig, rtrig;
  rec_t             recs [2];
  logic [1:0]       rec_valid, rec_ready;
  word_t            hdr_rdata, data_rdata;
  logic             hdr_rd, data_rd, hdr_valid, data_valid;
  logic [31:0]      n_sync, n_trig, n_vetoed, n_events, n_dropped, n_rx, n_lost;
  logic [31:0]      dt_total, dt_thr, dt_busy, dt_bp, hdr_words, data_words;

  timing_ctrl u_timing (.clk, .rst, .sync_in, .ts, .synced, .n_sync);

  ctrl_regs u_regs (
    .clk, .rst, .ipb_w, .ipb_r, .cfg, .dt_clear, .pb_wr, .pb_addr, .pb_data(pb_wdata), .stat,
    .hdr_rdata, .hdr_rd, .data_rdata, .data_rd
  );

  playback_buf #(.DEPTH(256)) u_pb (
    .clk, .rst, .wr_en(pb_wr), .wr_addr(pb_addr), .wr_data(pb_wdata), .run(cfg.pb_run),
    .len(cfg.pb_len), .sample(pb_sample)
  );

  for (genvar c = 0; c < NCHAN; c++) begin : g_chan
    chan #(.LAT(LAT), .WDEPTH(WDEPTH), .DDEPTH(DDEPTH), .BLK(BLK), .TWIN(TWIN),
           .CHAN_ID(6'(c))) u_chan (
      .clk, .rst, .raw(adc_raw[c]), .pb_sample, .cfg, .ts, .zs_force, .ro_req, .win,
      .fire(fire[c]), .cro_done(cro_done[c]), .cro_busy(cro_busy[c]),
      .d_rd(d_rd[c]), .d_data(d_data[c]), .d_valid(d_valid[c]), .d_bp(d_bp[c])
    );
  end

  assign throttle = hdr_bp || data_bp;

  trig_seq #(.NCHAN(NCHAN), .LAT(LAT), .BLK(BLK)) u_trig (
    .clk, .rst, .ts, .chan_fire(fire), .neutron_en(cfg.neutron_en), .rand_en(cfg.rand_en),
    .rand_rate(cfg.rand_rate), .throttle, .trig(ltrig), .rec_valid(rec_valid[0]), .rec(recs[0]),
    .rec_ready(rec_ready[0]), .zs_force, .n_trig, .n_vetoed
  );

  remote_trig u_remote (
    .clk, .rst, .local_trig(ltrig), .rx_en(cfg.remote_en), .tx(link_tx), .rx(link_rx),
    .remote(rtrig), .n_rx, .n_lost
  );

  ro_seq #(.NCHAN(NCHAN), .PRE(PRE), .POST(POST)) u_ro (
    .clk, .rst, .local_trig(ltrig), .remote_trig(rtrig), .bp(|d_bp), .ro_req, .win, .cro_done,
    .rec_valid(rec_valid[1]), .rec(recs[1]), .rec_ready(rec_ready[1]), .busy(ro_busy),
    .n_events, .n_dropped
  );

  header_buf #(.DEPTH(HDEPTH)) u_hdr (
    .clk, .rst, .rec_valid, .rec(recs), .rec_ready, .rd_en(hdr_rd), .rdata(hdr_rdata),
    .valid(hdr_valid), .n_words(hdr_words), .bp(hdr_bp)
  );

  data_buf #(.NCHAN(NCHAN), .DEPTH(DBDEPTH)) u_data (
    .clk, .rst, .ch_valid(d_valid), .ch_data(d_data), .ch_rd(d_rd), .rd_en(data_rd),
    .rdata(data_rdata), .valid(data_valid), .n_words(data_words), .bp(data_bp)
  );

  deadtime_mon u_dt (
    .clk, .rst, .clear(dt_clear), .throttle, .ro_busy, .derand_bp(|d_bp),
    .n_total(dt_total), .n_throttle(dt_thr), .n_busy(dt_busy), .n_bp(dt_bp)
  );

  always_comb begin
    stat             = '0;
    stat.ts          = ts;
    stat.n_sync      = n_sync;
    stat.n_trig      = n_trig;
    stat.n_vetoed    = n_vetoed;
    stat.n_events    = n_events;
    stat.n_remote    = n_rx;
    stat.dt_total    = dt_total;
    stat.dt_throttle = dt_thr;
    stat.dt_busy     = dt_busy;
    stat.dt_bp       = dt_bp;
    stat.hdr_words   = hdr_words;
    stat.data_words  = data_words;
  end
endmodule
