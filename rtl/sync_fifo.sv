// sync_fifo: single-clock first-word-fall-through FIFO used by the header and
// data buffers. 'rdata' shows the oldest entry while 'empty' is low; 'rd_en'
// removes it. 'almost_full' is high when more than DEPTH-AF_MARGIN entries are
// held. DEPTH must be a power of two.
module sync_fifo #(
  parameter int W         = 32,
  parameter int DEPTH     = 512,
  parameter int AF_MARGIN = 16,
  localparam int AW       = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         wr_en,
  input  logic [W-1:0] wdata,
  output logic         full,
  input  logic         rd_en,
  output logic [W-1:0] rdata,
  output logic         empty,
  output logic         almost_full,
  output logic [AW:0]  count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign full        = (count == (AW+1)'(DEPTH));
  assign empty       = (count == '0);
  assign almost_full = (count > (AW+1)'(DEPTH - AF_MARGIN));
  assign do_wr       = wr_en && !full;
  assign do_rd       = rd_en && !empty;
  assign rdata       = mem[rp];

  always_ff @(posedge clk) if (do_wr) mem[wp] <= wdata;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  initial assert (DEPTH == (1 << AW));
endmodule
