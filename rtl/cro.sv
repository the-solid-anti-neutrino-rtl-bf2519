// cro: channel readout controller, between the window buffer and the
// derandomiser. On 'ro_req' it latches the readout time window and walks the
// window buffer from its oldest block: blocks that end before the window are
// released unread, blocks that start inside it are copied to the derandomiser
// as a block header word (time stamp) followed by BLK sample words, and the
// walk ends at the first block that starts after the window, or, if the buffer
// runs empty, once data later than the window has passed zero suppression.
// A trailer word (channel number, number of blocks copied) closes the
// channel's part of the event and 'done' pulses. While busy it holds 'lock' so
// the window buffer does not overwrite blocks under it, and it waits whenever
// the derandomiser is full (back pressure). Word formats:
//   block header 01 | ts[29:0]
//   sample       10 | chan[5:0] | 0000000000 | sample[13:0]
//   trailer      11 | chan[5:0] | 0000000 | spare | nblocks[15:0]
// Only the block's name and position are given in the paper's diagram; this
// behaviour and the word format are this design's choice.
module cro
  import solid_pkg::*;
#(
  parameter int W   = SAMPLE_W,
  parameter int BLK = 16,
  localparam int BW = $clog2(BLK)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [5:0]    chan_id,
  input  logic          ro_req,
  input  ro_window_t    win,
  input  ts_t           cur_ts,       // time stamp of the sample now entering ZS
  // window buffer side
  input  logic          head_valid,
  input  ts_t           head_ts,
  output logic [BW-1:0] rd_idx,
  input  logic [W-1:0]  rd_data,
  output logic          pop,
  output logic          lock,
  // derandomiser side
  output logic          wr_en,
  output word_t         wr_data,
  input  logic          full,
  output logic          busy,
  output logic          done
);
  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_HDR, S_DATA, S_TRAIL} state_e;
  localparam ts_t BLK_LAST = ts_t'(BLK) - ts_t'(1);
  state_e        state;
  ro_window_t    w;
  logic [15:0]   nblk;
  logic [BW-1:0] idx;

  // Everything up to t_end has been committed to the window buffer once the
  // stream entering ZS is two blocks (plus a clock) past the window's end.
  logic passed_end;
  assign passed_end = (cur_ts > w.t_end + ts_t'(2*BLK + 2));

  assign rd_idx = idx;
  assign lock   = (state != S_IDLE);
  assign busy   = lock;

  always_comb begin
    wr_en   = 1'b0;
    wr_data = '0;
    pop     = 1'b0;
    unique case (state)
      S_SCAN:  pop = head_valid && (head_ts + BLK_LAST < w.t_start);
      S_HDR:   begin wr_en = !full; wr_data = mk_word(W_BLKHDR, head_ts[29:0]); end
      S_DATA:  begin
        wr_en   = !full;
        wr_data = mk_word(W_SAMPLE, {chan_id, 10'd0, rd_data});
        pop     = !full && (idx == BW'(BLK-1));
      end
      S_TRAIL: begin wr_en = !full; wr_data = mk_word(W_TRAILER, {chan_id, 8'd0, nblk}); end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      w     <= '0;
      nblk  <= '0;
      idx   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (ro_req) begin
          w     <= win;
          nblk  <= '0;
          state <= S_SCAN;
        end
        S_SCAN: begin
          if (head_valid) begin
            if (head_ts + BLK_LAST < w.t_start) state <= S_SCAN;   // popped
            else if (head_ts > w.t_end)                state <= S_TRAIL;
            else                                       state <= S_HDR;
          end else if (passed_end) begin
            state <= S_TRAIL;
          end
        end
        S_HDR: if (!full) begin
          idx   <= '0;
          state <= S_DATA;
        end
        S_DATA: if (!full) begin
          idx <= idx + 1'b1;
          if (idx == BW'(BLK-1)) begin
            nblk  <= nblk + 1'b1;
            state <= S_SCAN;
          end
        end
        S_TRAIL: if (!full) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (rst) wr_en |-> !full);
endmodule
