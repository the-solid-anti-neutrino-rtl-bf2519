// ctrl_regs: IPbus slave with the configuration and status registers and the
// read ports of the header and data buffers (the output multiplexer towards
// the IPbus controller). One transaction per strobe: 'ack' is a one-clock
// pulse a clock after 'strobe', with 'rdata'; the master then drops or renews
// 'strobe'. Reading the header or data port removes the word read. Unknown
// addresses answer with 'err'. Register map (word addresses, all assumed):
//   0x00 CSR  [1:0] source  [2] descramble  [6:3] bitslip  [7] ZS enable
//             [8] random enable  [9] neutron enable  [11:10] remote link enables
//             [12] pattern mode  [13] playback run  [31] deadtime clear (pulse)
//   0x01 ZS threshold   0x02 random rate   0x03 pedestal
//   0x04 [13:0] peak threshold, [24:16] peaks needed
//   0x05 pattern value  0x06 playback last address
//   0x07 playback write: [23:16] address, [13:0] sample
//   0x10 header words   0x11 header data   0x12 data words   0x13 data data
//   0x14..0x17 deadtime: total, throttled, readout busy, derandomiser back pressure
//   0x18 time stamp low  0x19 time stamp high  0x1A sync count
//   0x1B triggers  0x1C vetoed triggers  0x1D events read out  0x1E remote triggers received
// The IPbus protocol engine, Ethernet MAC and PHY are outside this module.
module ctrl_regs
  import solid_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  ipb_wbus_t ipb_w,
  output ipb_rbus_t ipb_r,
  output cfg_t      cfg,
  output logic      dt_clear,
  output logic      pb_wr,
  output logic [7:0] pb_addr,
  output sample_t   pb_data,
  input  stat_t     stat,
  input  word_t     hdr_rdata,
  output logic      hdr_rd,
  input  word_t     data_rdata,
  output logic      data_rd
);
  logic        go, wr;
  logic [4:0]  a;
  logic        hit_hi;

  assign go     = ipb_w.strobe && !ipb_r.ack && !ipb_r.err;
  assign wr     = go && ipb_w.write;
  assign a      = ipb_w.addr[4:0];
  assign hit_hi = (ipb_w.addr[31:5] == '0);
  assign hdr_rd  = go && !ipb_w.write && hit_hi && a == 5'h11;
  assign data_rd = go && !ipb_w.write && hit_hi && a == 5'h13;

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg       <= '0;
      cfg.zs_en <= 1'b1;
      ipb_r     <= '0;
      dt_clear  <= 1'b0;
      pb_wr     <= 1'b0;
      pb_addr   <= '0;
      pb_data   <= '0;
    end else begin
      ipb_r.ack <= 1'b0;
      ipb_r.err <= 1'b0;
      dt_clear  <= 1'b0;
      pb_wr     <= 1'b0;
      if (go) begin
        logic        ok;
        logic [31:0] d;
        ok = hit_hi;
        d  = '0;
        unique case (a)
          5'h00: d = {18'd0, cfg.pb_run, cfg.pat_mode, cfg.remote_en, cfg.neutron_en,
                      cfg.rand_en, cfg.zs_en, cfg.bitslip, cfg.descr_en, cfg.src};
          5'h01: d = 32'(cfg.zs_thr);
          5'h02: d = cfg.rand_rate;
          5'h03: d = 32'(cfg.pedestal);
          5'h04: d = {7'd0, cfg.npk_thr, 2'd0, cfg.peak_thr};
          5'h05: d = 32'(cfg.pat_value);
          5'h06: d = 32'(cfg.pb_len);
          5'h07: d = '0;
          5'h10: d = stat.hdr_words;
          5'h11: d = hdr_rdata;
          5'h12: d = stat.data_words;
          5'h13: d = data_rdata;
          5'h14: d = stat.dt_total;
          5'h15: d = stat.dt_throttle;
          5'h16: d = stat.dt_busy;
          5'h17: d = stat.dt_bp;
          5'h18: d = stat.ts[31:0];
          5'h19: d = 32'(stat.ts[47:32]);
          5'h1A: d = stat.n_sync;
          5'h1B: d = stat.n_trig;
          5'h1C: d = stat.n_vetoed;
          5'h1D: d = stat.n_events;
          5'h1E: d = stat.n_remote;
          default: ok = 1'b0;
        endcase
        if (wr && ok) begin
          unique case (a)
            5'h00: begin
              cfg.src        <= src_sel_e'(ipb_w.wdata[1:0]);
              cfg.descr_en   <= ipb_w.wdata[2];
              cfg.bitslip    <= ipb_w.wdata[6:3];
              cfg.zs_en      <= ipb_w.wdata[7];
              cfg.rand_en    <= ipb_w.wdata[8];
              cfg.neutron_en <= ipb_w.wdata[9];
              cfg.remote_en  <= ipb_w.wdata[11:10];
              cfg.pat_mode   <= ipb_w.wdata[12];
              cfg.pb_run     <= ipb_w.wdata[13];
              dt_clear       <= ipb_w.wdata[31];
            end
            5'h01: cfg.zs_thr    <= ipb_w.wdata[13:0];
            5'h02: cfg.rand_rate <= ipb_w.wdata;
            5'h03: cfg.pedestal  <= ipb_w.wdata[13:0];
            5'h04: begin
              cfg.peak_thr <= ipb_w.wdata[13:0];
              cfg.npk_thr  <= ipb_w.wdata[24:16];
            end
            5'h05: cfg.pat_value <= ipb_w.wdata[13:0];
            5'h06: cfg.pb_len    <= ipb_w.wdata[7:0];
            5'h07: begin
              pb_wr   <= 1'b1;
              pb_addr <= ipb_w.wdata[23:16];
              pb_data <= ipb_w.wdata[13:0];
            end
            default: ok = 1'b0;   // read-only register: write ignored
          endcase
        end
        ipb_r.ack   <= ok;
        ipb_r.err   <= !ok;
        ipb_r.rdata <= d;
      end
    end
  end
endmodule
