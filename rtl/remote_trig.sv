// remote_trig: trigger exchange with the two neighbouring detector planes.
// Every accepted local neutron trigger is sent on both links as one link word
// (marker LINK_TRIG and the 48-bit time stamp; the time stamp is common to all
// planes through the sync). A trigger word received on an enabled link becomes
// a readout request of type TT_REMOTE with the sender's time stamp, so this
// plane reads out the same time window. If both links deliver the same time
// stamp in one clock, one request is made; if they differ, the second waits in
// a one-deep holding register; a request that finds it occupied is lost and
// counted. Received triggers are not forwarded again. The exchange itself is
// the paper's; the link word and the arbitration are this design's choice.
// The multi-gigabit transceivers are outside this module: tx/rx are their
// parallel user words, one per clock.
module remote_trig
  import solid_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  trig_t      local_trig,
  input  logic [1:0] rx_en,
  output link_word_t tx [2],
  input  link_word_t rx [2],
  output trig_t      remote,
  output logic [31:0] n_rx,
  output logic [31:0] n_lost
);
  logic  v0, v1, b;
  trig_t pend;

  assign v0 = rx_en[0] && (rx[0].marker == LINK_TRIG);
  assign v1 = rx_en[1] && (rx[1].marker == LINK_TRIG);
  assign b  = v1 && !(v0 && rx[1].ts == rx[0].ts);

  always_ff @(posedge clk) begin
    if (rst) begin
      tx[0]  <= '0;
      tx[1]  <= '0;
      remote <= '0;
      pend   <= '0;
      n_rx   <= '0;
      n_lost <= '0;
    end else begin
      if (local_trig.valid && local_trig.ttype == TT_NEUTRON) begin
        tx[0] <= '{marker: LINK_TRIG, spare: '0, ts: local_trig.ts};
        tx[1] <= '{marker: LINK_TRIG, spare: '0, ts: local_trig.ts};
      end else begin
        tx[0] <= '0;
        tx[1] <= '0;
      end
      n_rx <= n_rx + 32'(v0) + 32'(v1);
      remote.valid <= 1'b0;
      if (v0) begin
        remote <= '{valid: 1'b1, ttype: TT_REMOTE, ts: rx[0].ts};
        if (b) begin
          if (!pend.valid) pend <= '{valid: 1'b1, ttype: TT_REMOTE, ts: rx[1].ts};
          else             n_lost <= n_lost + 1;
        end
      end else if (pend.valid) begin
        remote <= pend;
        if (b) pend <= '{valid: 1'b1, ttype: TT_REMOTE, ts: rx[1].ts};
        else   pend.valid <= 1'b0;
      end else if (b) begin
        remote <= '{valid: 1'b1, ttype: TT_REMOTE, ts: rx[1].ts};
      end
    end
  end
endmodule
