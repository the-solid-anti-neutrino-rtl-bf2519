// zs_block: block zero suppression at the end of the latency buffer.
// The delayed stream is cut into blocks of BLK samples that start at time
// stamps divisible by BLK. A block is kept if at least one of its samples is
// above 'threshold', if 'force' was high during it (the trigger is capturing
// non zero suppressed data), or if suppression is disabled. A kept block is
// re-emitted on the following BLK clocks, one sample per clock, 'dout_first'
// marking its first sample and 'dout_ts' its time of arrival. Blocks and the
// threshold rule follow the paper; the block length, the alignment and the
// forcing input are this design's choices.
module zs_block
  import solid_pkg::*;
#(
  parameter int W   = SAMPLE_W,
  parameter int BLK = 16,
  localparam int BW = $clog2(BLK)
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] din,
  input  logic         din_valid,
  input  ts_t          din_ts,
  input  logic [W-1:0] threshold,
  input  logic         zs_en,
  input  logic         force_keep,
  output logic [W-1:0] dout,
  output logic         dout_valid,
  output logic         dout_first,
  output ts_t          dout_ts,
  output logic [31:0]  n_kept        // kept blocks since reset
);
  logic [W-1:0]  cap [BLK];
  logic [W-1:0]  obuf [BLK];
  logic          hit, started;
  ts_t           cap_ts;
  logic [BW-1:0] idx, oidx;
  logic          emitting;
  ts_t           out_ts;
  logic          keep_now;

  assign idx      = din_ts[BW-1:0];
  assign keep_now = hit || (din > threshold) || force_keep || !zs_en;

  always_ff @(posedge clk) begin
    if (din_valid) cap[idx] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      hit        <= 1'b0;
      started    <= 1'b0;
      cap_ts     <= '0;
      emitting   <= 1'b0;
      oidx       <= '0;
      out_ts     <= '0;
      n_kept     <= '0;
    end else begin
      if (din_valid) begin
        if (idx == '0) begin
          started <= 1'b1;
          cap_ts  <= din_ts;
          hit     <= (din > threshold) || force_keep || !zs_en;
        end else begin
          hit <= keep_now;
        end
        if (idx == BW'(BLK-1) && started && (idx == '0 ? 1'b0 : keep_now)) begin
          for (int i = 0; i < BLK - 1; i++) obuf[i] <= cap[i];
          obuf[BLK-1] <= din;
          emitting    <= 1'b1;
          oidx        <= '0;
          out_ts      <= cap_ts;
          n_kept      <= n_kept + 1;
        end else if (emitting) begin
          oidx <= oidx + 1'b1;
          if (oidx == BW'(BLK-1)) emitting <= 1'b0;
        end
      end else if (emitting) begin
        oidx <= oidx + 1'b1;
        if (oidx == BW'(BLK-1)) emitting <= 1'b0;
      end
    end
  end

  always_comb begin
    dout       = obuf[oidx];
    dout_valid = emitting;
    dout_first = emitting && (oidx == '0);
    dout_ts    = out_ts + ts_t'(oidx);
  end
endmodule
