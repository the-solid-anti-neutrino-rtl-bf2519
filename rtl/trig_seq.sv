// trig_seq: trigger block (trigger sequencer, random trigger and trigger type 1).
// Trigger type 1 is the neutron trigger: any channel trigger while enabled.
// The random trigger (rand_trig) gives unbiased triggers. In a clock where a
// trigger is requested, neutron has priority over random, and the request is
// vetoed (and counted) if the header or data buffer asserts back pressure
// ('throttle'), if the previous trigger is still forcing non zero suppressed
// capture, or if its record has not yet been taken by the header buffer.
// An accepted trigger (1) pulses 'trig' with its type and the current time
// stamp, for the readout sequencer and the remote trigger; (2) queues a 64-bit
// trigger record for the header buffer (valid/ready); (3) holds 'zs_force' for
// LAT+BLK clocks, so every block that was in the latency buffer when the
// trigger fired leaves ZS unsuppressed. The paper gives the roles (neutron
// trigger, random trigger, storing the non zero suppressed data); the veto and
// force rules are this design's choice.
module trig_seq
  import solid_pkg::*;
#(
  parameter int NCHAN = 64,
  parameter int LAT   = 512,
  parameter int BLK   = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  ts_t              ts,
  input  logic [NCHAN-1:0] chan_fire,
  input  logic             neutron_en,
  input  logic             rand_en,
  input  logic [31:0]      rand_rate,
  input  logic             throttle,
  output trig_t            trig,
  output logic             rec_valid,
  output rec_t             rec,
  input  logic             rec_ready,
  output logic             zs_force,
  output logic [31:0]      n_trig,
  output logic [31:0]      n_vetoed
);
  localparam int FW = $clog2(LAT + BLK + 1);
  logic          rand_fire, req_n, req, busy;
  logic [FW-1:0] force_cnt;

  rand_trig u_rand (.clk, .rst, .en(rand_en), .rate(rand_rate), .fire(rand_fire));

  assign req_n    = neutron_en && (|chan_fire);
  assign req      = req_n || rand_fire;
  assign zs_force = (force_cnt != '0);
  assign busy     = zs_force || rec_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      trig      <= '0;
      rec_valid <= 1'b0;
      rec       <= '0;
      force_cnt <= '0;
      n_trig    <= '0;
      n_vetoed  <= '0;
    end else begin
      trig.valid <= 1'b0;
      if (rec_valid && rec_ready) rec_valid <= 1'b0;
      if (force_cnt != '0) force_cnt <= force_cnt - 1'b1;
      if (req) begin
        if (throttle || busy) begin
          n_vetoed <= n_vetoed + 1;
        end else begin
          trig      <= '{valid: 1'b1, ttype: (req_n ? TT_NEUTRON : TT_RANDOM), ts: ts};
          rec       <= '{tag: REC_TRIG, kind: (req_n ? TT_NEUTRON : TT_RANDOM), spare: '0, ts: ts};
          rec_valid <= 1'b1;
          force_cnt <= FW'(LAT + BLK);
          n_trig    <= n_trig + 1;
        end
      end
    end
  end
endmodule
