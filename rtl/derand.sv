// derand: derandomiser, the per-channel FIFO between the readout controller
// and the shared data buffer (2048 words deep, one sample per word). It is a
// first-word-fall-through FIFO: 'rdata' shows the oldest word while 'valid'
// is high and 'rd_en' removes it. 'bp' (back pressure) is high while fewer
// than AF_MARGIN words are free; a write while full is refused; 'hwm' is the highest fill level seen. Depth
// follows the paper; the back-pressure margin is this design's choice.
module derand
  import solid_pkg::*;
#(
  parameter int DEPTH     = 2048,
  parameter int AF_MARGIN = 64,
  localparam int AW       = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        wr_en,
  input  word_t       wdata,
  output logic        full,
  input  logic        rd_en,
  output word_t       rdata,
  output logic        valid,
  output logic        bp,
  output logic [AW:0] count,
  output logic [AW:0] hwm
);
  word_t         mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign full  = (count == (AW+1)'(DEPTH));
  assign valid = (count != '0);
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && valid;
  assign rdata = mem[rp];
  assign bp    = (count > (AW+1)'(DEPTH - AF_MARGIN));

  always_ff @(posedge clk) if (do_wr) mem[wp] <= wdata;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
      hwm   <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      if (count > hwm) hwm <= count;
    end
  end

endmodule
