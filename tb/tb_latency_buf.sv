// tb_latency_buf: feeds random samples into a full-size (512) latency buffer
// and checks that each comes out exactly 512 clocks later, and that
// dout_valid rises exactly when the first sample emerges.
module tb_latency_buf;
  import solid_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  localparam int D = 512;
  logic [13:0] din, dout; logic dout_valid;
  logic [13:0] hist [3000];
  latency_buf #(.DEPTH(D)) dut (.clk, .rst, .din, .dout, .dout_valid);
  initial begin
    din = 0;
    @(posedge clk); #1; rst = 0;
    for (int t = 0; t < 3000; t++) begin
      hist[t] = 14'($urandom);
      din = hist[t];
      @(posedge clk); #1;
      // sample t was on din in the clock before this edge; it must show D clocks later
      if (t >= D - 1) begin
        chk(dout_valid, "valid once full");
        chk(dout == hist[t - D + 1], $sformatf("t=%0d got %h want %h", t, dout, hist[t-D+1]));
      end else begin
        chk(!dout_valid, "not valid before full");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
