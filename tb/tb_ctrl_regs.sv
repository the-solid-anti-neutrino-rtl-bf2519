// tb_ctrl_regs: IPbus transactions against the register block: writes and
// read-back of every configuration register with the decoded cfg fields,
// the playback write strobe, the deadtime clear pulse, status registers,
// pop-on-read of the header and data ports, and err on unknown addresses and
// on writes to read-only registers. Ack comes one clock after the strobe.
module tb_ctrl_regs;
  import solid_pkg::*;
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
  ipb_wbus_t ipb_w; ipb_rbus_t ipb_r; cfg_t cfg; logic dt_clear, pb_wr, hdr_rd, data_rd; logic [7:0] pb_addr;
  sample_t pb_data; stat_t stat; word_t hdr_rdata, data_rdata;
  ctrl_regs dut (.clk, .rst, .ipb_w, .ipb_r, .cfg, .dt_clear, .pb_wr, .pb_addr, .pb_data, .stat,
    .hdr_rdata, .hdr_rd, .data_rdata, .data_rd);
  int n_hdr_pops = 0, n_data_pops = 0, n_pb = 0, n_clr = 0;
  always @(negedge clk) begin
    n_hdr_pops += hdr_rd; n_data_pops += data_rd; n_pb += pb_wr; n_clr += dt_clear;
  end

  task automatic xact(bit wr, logic [31:0] addr, logic [31:0] wdata, output logic [31:0] rdata, output bit err);
    ipb_w = '{addr: addr, wdata: wdata, strobe: 1'b1, write: wr};
    @(posedge clk); #1;
    ipb_w.strobe = 1'b0;
    chk(ipb_r.ack || ipb_r.err, "answer one clock after strobe");
    rdata = ipb_r.rdata; err = ipb_r.err;
    @(posedge clk); #1;
  endtask

  initial begin
    logic [31:0] d; bit e;
    ipb_w = '0; stat = '0; hdr_rdata = 32'hAAAA_0001; data_rdata = 32'hDDDD_0002;
    @(posedge clk); #1; rst = 0;
    xact(0, 0, 0, d, e); chk(!e && d[7] == 1'b1, "ZS enabled after reset");
    xact(1, 0, 32'h8000_3FFE, d, e);
    chk(cfg.src == src_sel_e'(2'b10) && cfg.descr_en && cfg.bitslip == 4'hF && cfg.zs_en && cfg.rand_en &&
        cfg.neutron_en && cfg.remote_en == 2'b11 && cfg.pat_mode && cfg.pb_run, "CSR fields");
    chk(n_clr == 1, "deadtime clear pulse");
    xact(0, 0, 0, d, e); chk(d == 32'h0000_3FFE, "CSR read back");
    for (int r = 1; r <= 6; r++) begin
      logic [31:0] v; v = $urandom;
      xact(1, r, v, d, e); chk(!e, "write ok");
      xact(0, r, 0, d, e);
      unique case (r)
        1: chk(d == 32'(v[13:0]) && cfg.zs_thr == v[13:0], "zs threshold");
        2: chk(d == v && cfg.rand_rate == v, "random rate");
        3: chk(d == 32'(v[13:0]) && cfg.pedestal == v[13:0], "pedestal");
        4: chk(d == {7'd0, v[24:16], 2'd0, v[13:0]} && cfg.npk_thr == v[24:16] && cfg.peak_thr == v[13:0], "peak settings");
        5: chk(d == 32'(v[13:0]) && cfg.pat_value == v[13:0], "pattern value");
        6: chk(d == 32'(v[7:0]) && cfg.pb_len == v[7:0], "playback length");
        default: ;
      endcase
    end
    ipb_w = '{addr: 7, wdata: {8'd0, 8'd77, 2'd0, 14'd4321}, strobe: 1, write: 1};
    @(posedge clk); #1; ipb_w.strobe = 0;
    chk(pb_wr && pb_addr == 8'd77 && pb_data == 14'd4321, "playback write");
    @(posedge clk); #1;
    stat.n_trig = 32'd55; stat.ts = 48'h1234_5678_9ABC; stat.dt_bp = 32'd9; stat.hdr_words = 32'd3;
    xact(0, 32'h1B, 0, d, e); chk(d == 32'd55, "trigger count");
    xact(0, 32'h18, 0, d, e); chk(d == 32'h5678_9ABC, "time stamp low");
    xact(0, 32'h19, 0, d, e); chk(d == 32'h0000_1234, "time stamp high");
    xact(0, 32'h17, 0, d, e); chk(d == 32'd9, "deadtime bp");
    xact(0, 32'h10, 0, d, e); chk(d == 32'd3, "header words");
    xact(0, 32'h11, 0, d, e); chk(d == 32'hAAAA_0001 && n_hdr_pops == 1, "header read pops one word");
    xact(0, 32'h13, 0, d, e); chk(d == 32'hDDDD_0002 && n_data_pops == 1, "data read pops one word");
    xact(0, 32'h1F, 0, d, e); chk(e, "unknown address");
    xact(0, 32'h100, 0, d, e); chk(e, "address out of range");
    xact(1, 32'h10, 0, d, e); chk(e, "write to read-only");
    chk(n_pb == 1, "one playback write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
