// playback_buf: replays a stored waveform as channel input.
// A DEPTH-sample RAM is loaded through a write port (from the control
// registers) and read out in a loop: address 0, 1, ... len, 0, ... one sample
// per clock while 'run' is high; 'run' low rewinds to address 0. The output is
// registered (one clock after the address). Only the name "Playback" is given
// for this source; the RAM, its depth and the loop are this design's choice.
module playback_buf
  import solid_pkg::*;
#(
  parameter int W     = SAMPLE_W,
  parameter int DEPTH = 256,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          run,
  input  logic [AW-1:0] len,      // last address of the loop
  output logic [W-1:0]  sample
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_addr;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_addr <= '0;
      sample  <= '0;
    end else begin
      sample <= mem[rd_addr];
      if (!run || rd_addr == len) rd_addr <= '0;
      else                        rd_addr <= rd_addr + 1'b1;
    end
  end
endmodule
