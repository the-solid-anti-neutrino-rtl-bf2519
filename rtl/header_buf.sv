// header_buf: header buffer with its two-input multiplexer.
// Takes 64-bit records from the trigger sequencer (input 0, priority) and the
// readout sequencer (input 1) by valid/ready, one per clock, into a FIFO of
// DEPTH records. The read side is 32-bit words for IPbus: the high word of the
// oldest record, then its low word; 'rd_en' removes one word. 'bp' (back
// pressure to the trigger) is high when fewer than 16 records are free.
// The depth and the word order are this design's choice.
module header_buf
  import solid_pkg::*;
#(
  parameter int DEPTH = 512,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [1:0]  rec_valid,
  input  rec_t        rec [2],
  output logic [1:0]  rec_ready,
  input  logic        rd_en,
  output word_t       rdata,
  output logic        valid,
  output logic [31:0] n_words,
  output logic        bp
);
  logic        full, empty, half, pop;
  logic [63:0] head;
  logic [AW:0] count;

  assign rec_ready[0] = !full;
  assign rec_ready[1] = !full && !rec_valid[0];
  assign pop          = rd_en && !empty && half;

  sync_fifo #(.W(64), .DEPTH(DEPTH), .AF_MARGIN(16)) u_fifo (
    .clk, .rst,
    .wr_en(|rec_valid && !full), .wdata(rec_valid[0] ? rec[0] : rec[1]), .full,
    .rd_en(pop), .rdata(head), .empty, .almost_full(bp), .count
  );

  always_ff @(posedge clk) begin
    if (rst)                  half <= 1'b0;
    else if (rd_en && !empty) half <= !half;
  end

  assign valid   = !empty;
  assign rdata   = half ? head[31:0] : head[63:32];
  assign n_words = 32'(count) * 2 - 32'(half);
endmodule
