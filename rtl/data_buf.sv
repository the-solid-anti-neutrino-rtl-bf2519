// data_buf: data buffer with its channel multiplexer.
// Drains the channel derandomisers into one FIFO of 32-bit words: it stays on
// one channel, moving one word per clock while the FIFO has room, until that
// channel's trailer word has passed, then moves to the next channel (0, 1,
// ... NCHAN-1, 0, ...). Because every readout produces exactly one trailer per
// channel, the words of an event leave channel by channel, in order. The FIFO
// is read over IPbus (first word falls through; 'rd_en' removes it). 'bp' (back
// pressure to the trigger) is high when fewer than 256 words (a quarter of
// the buffer, if that is smaller) are free. The
// depth and the merge order are this design's choice.
module data_buf
  import solid_pkg::*;
#(
  parameter int NCHAN = 64,
  parameter int DEPTH = 8192,
  localparam int AW   = $clog2(DEPTH),
  localparam int CW   = (NCHAN > 1) ? $clog2(NCHAN) : 1,
  localparam int AFM  = (DEPTH >= 1024) ? 256 : DEPTH / 4
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [NCHAN-1:0] ch_valid,
  input  word_t            ch_data [NCHAN],
  output logic [NCHAN-1:0] ch_rd,
  input  logic             rd_en,
  output word_t            rdata,
  output logic             valid,
  output logic [31:0]      n_words,
  output logic             bp
);
  logic [CW-1:0] cur;
  logic          full, empty, move;
  word_t         w;
  logic [AW:0]   count;

  assign w    = ch_data[cur];
  assign move = ch_valid[cur] && !full;

  always_comb begin
    ch_rd      = '0;
    ch_rd[cur] = move;
  end

  sync_fifo #(.W(32), .DEPTH(DEPTH), .AF_MARGIN(AFM)) u_fifo (
    .clk, .rst, .wr_en(move), .wdata(w), .full,
    .rd_en, .rdata, .empty, .almost_full(bp), .count
  );

  always_ff @(posedge clk) begin
    if (rst) cur <= '0;
    else if (move && w[31:30] == W_TRAILER)
      cur <= (cur == CW'(NCHAN-1)) ? '0 : cur + 1'b1;
  end

  assign valid   = !empty;
  assign n_words = 32'(count);
endmodule
