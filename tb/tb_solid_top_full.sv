// tb_solid_top_full: the end-to-end scenario of tb_solid_top run on the plane
// at its full size. tb_solid_top with FULL=1 instantiates solid_top with no
// parameter overridden: 64 channels, latency buffer 512, window buffer 1536,
// derandomiser 2048, readout window 20000 samples before and after the
// trigger (1 ms at 40 MHz), header buffer 512 and data buffer 8192 words.
// The result line and the watchdog come from tb_solid_top.
module tb_solid_top_full;
  tb_solid_top #(.FULL(1)) u_tb ();
endmodule
