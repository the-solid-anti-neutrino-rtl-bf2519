// chan: the processing chain of one ADC channel.
//   raw bits -> adc_deser -> source mux (ADC / playback / pattern)
//     -> latency_buf (LAT) -> zs_block -> window_buf -> cro -> derand
//   and, in parallel on the undelayed samples, chan_trig.
// 'ts' is the time stamp of the sample now leaving the source multiplexer;
// the samples leaving the latency buffer are therefore LAT clocks older, and
// that is the time ZS and the readout controller work with. The chain follows
// the paper's firmware diagram; the shared configuration is this design's.
module chan
  import solid_pkg::*;
#(
  parameter int           LAT     = 512,
  parameter int           WDEPTH  = 1536,
  parameter int           DDEPTH  = 2048,
  parameter int           BLK     = 16,
  parameter int           TWIN    = 256,
  parameter logic [5:0]   CHAN_ID = 6'd0,
  localparam int          DAW     = $clog2(DDEPTH)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [SAMPLE_W-1:0]  raw,
  input  sample_t              pb_sample,
  input  cfg_t                 cfg,
  input  ts_t                  ts,
  input  logic                 zs_force,
  input  logic                 ro_req,
  input  ro_window_t           win,
  output logic                 fire,
  output logic                 cro_done,
  output logic                 cro_busy,
  input  logic                 d_rd,
  output word_t                d_data,
  output logic                 d_valid,
  output logic                 d_bp
);
  localparam int BW = $clog2(BLK);
  sample_t  s_adc, s_pat, s_in, s_dly, z_out, wb_rd;
  logic     adc_valid, dly_valid, z_valid, z_first, wb_head_valid, wb_pop, wb_lock;
  logic     wr_en, d_full;
  ts_t      ts_dly, z_ts, wb_head_ts;
  word_t    wr_data;
  logic [BW-1:0]          rd_idx;
  logic [$clog2(TWIN+1)-1:0] npeaks;
  logic [DAW:0]           d_count, d_hwm;
  logic [$clog2(WDEPTH/BLK):0] wb_n;
  logic [31:0] z_kept, wb_ovw, wb_ovf;

  adc_deser u_deser (.clk, .rst, .raw, .bitslip(cfg.bitslip), .descramble_en(cfg.descr_en),
                     .sample(s_adc), .sample_valid(adc_valid));

  pattern_gen u_pat (.clk, .rst, .mode(cfg.pat_mode), .value(cfg.pat_value), .sample(s_pat));

  always_comb begin
    unique case (cfg.src)
      SRC_PLAYBACK: s_in = pb_sample;
      SRC_PATTERN:  s_in = s_pat;
      default:      s_in = s_adc;
    endcase
  end

  latency_buf #(.DEPTH(LAT)) u_lat (.clk, .rst, .din(s_in), .dout(s_dly), .dout_valid(dly_valid));

  chan_trig #(.WIN(TWIN)) u_trig (
    .clk, .rst, .din(s_in), .din_valid(1'b1), .pedestal(cfg.pedestal), .peak_thr(cfg.peak_thr),
    .npk_thr(cfg.npk_thr[$clog2(TWIN+1)-1:0]), .fire, .npeaks
  );

  assign ts_dly = ts - ts_t'(LAT);

  zs_block #(.BLK(BLK)) u_zs (
    .clk, .rst, .din(s_dly), .din_valid(dly_valid), .din_ts(ts_dly), .threshold(cfg.zs_thr),
    .zs_en(cfg.zs_en), .force_keep(zs_force),
    .dout(z_out), .dout_valid(z_valid), .dout_first(z_first), .dout_ts(z_ts), .n_kept(z_kept)
  );

  window_buf #(.DEPTH(WDEPTH), .BLK(BLK)) u_win (
    .clk, .rst, .din(z_out), .din_valid(z_valid), .din_first(z_first), .din_ts(z_ts),
    .lock(wb_lock), .head_valid(wb_head_valid), .head_ts(wb_head_ts), .rd_idx, .rd_data(wb_rd),
    .pop(wb_pop), .n_blocks(wb_n), .n_overwritten(wb_ovw), .n_overflow(wb_ovf)
  );

  cro #(.BLK(BLK)) u_cro (
    .clk, .rst, .chan_id(CHAN_ID), .ro_req, .win, .cur_ts(ts_dly),
    .head_valid(wb_head_valid), .head_ts(wb_head_ts), .rd_idx, .rd_data(wb_rd), .pop(wb_pop),
    .lock(wb_lock), .wr_en, .wr_data, .full(d_full), .busy(cro_busy), .done(cro_done)
  );

  derand #(.DEPTH(DDEPTH)) u_derand (
    .clk, .rst, .wr_en, .wdata(wr_data), .full(d_full), .rd_en(d_rd), .rdata(d_data),
    .valid(d_valid), .bp(d_bp), .count(d_count), .hwm(d_hwm)
  );
endmodule
