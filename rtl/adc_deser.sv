// adc_deser: deserialiser / descrambler of one ADC channel.
// Each ADC channel sends 14 bits per 40 MHz sample clock (560 Mbit/s). The I/O
// serialiser primitive (vendor IP, outside this RTL) hands over the 14 bits
// received in one sample period, MSB first, but the word boundary is unknown.
// This stage keeps the previous 14 bits, picks the 14-bit window that starts
// 'bitslip' bits into them (0..13), and optionally undoes the ADC output
// randomiser, in which bits 13..1 are XORed with bit 0 (LTM9007 convention,
// taken from the ADC rather than the paper). One clock of latency.
module adc_deser
  import solid_pkg::*;
#(
  parameter int W = SAMPLE_W
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] raw,            // bits of one sample period, oldest bit in [W-1]
  input  logic [3:0]   bitslip,        // word boundary offset in bits, 0..W-1
  input  logic         descramble_en,
  output logic [W-1:0] sample,
  output logic         sample_valid
);
  logic [W-1:0]   prev;
  logic [2*W-1:0] cat;
  logic [W-1:0]   aligned;
  logic           primed;

  assign cat = {prev, raw};

  always_comb begin
    aligned = cat[2*W-1 -: W];
    for (int s = 0; s < W; s++)
      if (int'(bitslip) == s) aligned = cat[2*W-1-s -: W];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      prev         <= '0;
      sample       <= '0;
      sample_valid <= 1'b0;
      primed       <= 1'b0;
    end else begin
      prev         <= raw;
      primed       <= 1'b1;
      sample_valid <= primed;
      if (descramble_en) sample <= {aligned[W-1:1] ^ {(W-1){aligned[0]}}, aligned[0]};
      else               sample <= aligned;
    end
  end
endmodule
