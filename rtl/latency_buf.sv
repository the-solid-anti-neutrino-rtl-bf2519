// latency_buf: the non zero suppressed latency buffer (512 samples, 12.8 us).
// A circular RAM of DEPTH-1 words, written and read at the same address each
// clock (read before write), followed by the output register: DEPTH samples
// are held and a sample on 'din' appears on 'dout' exactly DEPTH clocks later.
// dout_valid rises with the first sample written after reset. The depth is
// the paper's; the RAM organisation is the obvious one.
module latency_buf
  import solid_pkg::*;
#(
  parameter int W     = SAMPLE_W,
  parameter int DEPTH = 512,
  localparam int AW   = $clog2(DEPTH - 1)
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout,
  output logic         dout_valid
);
  logic [W-1:0]  mem [DEPTH-1];
  logic [AW-1:0] ptr;
  logic [AW:0]   fill;

  always_ff @(posedge clk) begin
    dout     <= mem[ptr];
    mem[ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr        <= '0;
      fill       <= '0;
      dout_valid <= 1'b0;
    end else begin
      ptr <= (ptr == AW'(DEPTH-2)) ? '0 : ptr + 1'b1;
      if (fill != (AW+1)'(DEPTH-1)) fill <= fill + 1'b1;
      dout_valid <= (fill == (AW+1)'(DEPTH-1));
    end
  end
endmodule
