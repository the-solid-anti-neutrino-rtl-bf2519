// timing_ctrl: timing / sync controller. The board clock is the 40 MHz sample
// clock distributed to every plane; the sync signal from the same board is
// brought in asynchronously, passed through a two-flop synchroniser, and its
// rising edge sets the 48-bit time stamp to zero, so every plane counts the
// same time. 'synced' is high after the first sync; 'n_sync' counts syncs. The
// time stamp advances by one per clock. Zeroing on sync is this design's
// choice; the paper gives the clock and sync distribution.
module timing_ctrl
  import solid_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        sync_in,
  output ts_t         ts,
  output logic        synced,
  output logic [31:0] n_sync
);
  logic [2:0] sr;
  logic       edge_seen;

  assign edge_seen = sr[1] && !sr[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      sr     <= '0;
      ts     <= '0;
      synced <= 1'b0;
      n_sync <= '0;
    end else begin
      sr <= {sr[1:0], sync_in};
      if (edge_seen) begin
        ts     <= '0;
        synced <= 1'b1;
        n_sync <= n_sync + 1;
      end else begin
        ts <= ts + 1'b1;
      end
    end
  end
endmodule
