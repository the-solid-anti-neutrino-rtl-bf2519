// window_buf: zero suppressed window buffer (1536 samples = 96 blocks of 16).
// A ring of block slots, each holding BLK samples and the block's time stamp.
// Blocks arrive from zs_block as a burst of BLK samples ('din_first' on the
// first) and become visible to the reader when their last sample is written.
// The reader (cro) sees the oldest block (head_valid, head_ts), reads its
// samples by index with no latency (distributed RAM), and releases it with
// 'pop'. When the ring is full, a new block normally overwrites the oldest one,
// so the buffer always holds the most recent history; while 'lock' is high
// (a readout is in progress) the new block is dropped instead and counted in
// n_overflow. Sizes follow the paper; the overwrite policy is this design's.
module window_buf
  import solid_pkg::*;
#(
  parameter int W     = SAMPLE_W,
  parameter int DEPTH = 1536,
  parameter int BLK   = 16,
  localparam int NBLK = DEPTH / BLK,
  localparam int SW   = $clog2(NBLK),
  localparam int BW   = $clog2(BLK)
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] din,
  input  logic         din_valid,
  input  logic         din_first,
  input  ts_t          din_ts,
  input  logic         lock,
  output logic         head_valid,
  output ts_t          head_ts,
  input  logic [BW-1:0] rd_idx,
  output logic [W-1:0] rd_data,
  input  logic         pop,
  output logic [SW:0]  n_blocks,
  output logic [31:0]  n_overwritten,
  output logic [31:0]  n_overflow
);
  logic [W-1:0]  mem [NBLK*BLK];
  ts_t           tag [NBLK];
  logic [SW-1:0] wslot, rslot;
  logic [BW-1:0] widx;
  logic          writing;        // current incoming block is being stored
  logic          commit, take_oldest, do_pop;

  function automatic logic [SW-1:0] inc(logic [SW-1:0] s);
    return (s == SW'(NBLK-1)) ? '0 : s + 1'b1;
  endfunction

  // A block in flight counts in n_blocks only once committed. Blocks arrive
  // back to back at most, so no block is in flight at a din_first.
  logic full, drop_new, wr_en;
  logic [BW-1:0] wr_idx;
  assign full     = (n_blocks == (SW+1)'(NBLK));
  assign drop_new = din_valid && din_first && full && lock;
  assign wr_en    = din_valid && (din_first ? !drop_new : writing);
  assign wr_idx   = din_first ? '0 : widx;

  assign commit      = writing && din_valid && (widx == BW'(BLK-1));
  assign take_oldest = din_valid && din_first && full && !lock;
  assign do_pop      = pop && head_valid;

  always_ff @(posedge clk) begin
    if (wr_en) mem[int'(wslot)*BLK + int'(wr_idx)] <= din;
    if (din_valid && din_first && !drop_new) tag[wslot] <= din_ts;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wslot         <= '0;
      rslot         <= '0;
      widx          <= '0;
      writing       <= 1'b0;
      n_blocks      <= '0;
      n_overwritten <= '0;
      n_overflow    <= '0;
    end else begin
      if (din_valid && din_first) begin
        if (drop_new) begin
          writing    <= 1'b0;
          n_overflow <= n_overflow + 1;
        end else begin
          writing <= 1'b1;
          widx    <= BW'(1);
        end
      end else if (writing && din_valid) begin
        widx <= widx + 1'b1;
        if (commit) begin
          writing <= 1'b0;
          wslot   <= inc(wslot);
        end
      end
      if (take_oldest || do_pop) rslot <= inc(rslot);
      n_blocks <= n_blocks + (SW+1)'(commit) - (SW+1)'(take_oldest || do_pop);
      if (take_oldest) n_overwritten <= n_overwritten + 1;
    end
  end

  assign head_valid = (n_blocks != '0);
  assign head_ts    = tag[rslot];
  assign rd_data    = mem[int'(rslot)*BLK + int'(rd_idx)];

  // A block is never both taken as oldest and popped in the same clock: the
  // reader only pops while it holds the lock.
  assert property (@(posedge clk) disable iff (rst) !(take_oldest && pop));
  // BLK = 1 would make a block's first sample also its last.
  initial assert (BLK > 1);
endmodule
