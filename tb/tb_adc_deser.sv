// tb_adc_deser: self-checking test of adc_deser. For every bit-slip 0..13 it
// builds a serial bit stream of scrambled random samples that starts 'slip'
// bits late, cuts it into 14-bit chunks as the I/O serialiser would, and checks
// that each output is the original sample one clock later. A second pass with
// descrambling off checks that the raw (still scrambled) word comes out.
module tb_adc_deser;
  import solid_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [13:0] raw, sample;
  logic [3:0]  bitslip;
  logic        descr, sample_valid;
  adc_deser dut (.clk, .rst, .raw, .bitslip, .descramble_en(descr), .sample, .sample_valid);

  localparam int NS = 40;
  logic [13:0] s [NS];
  logic [13:0] c [NS];
  bit          bits [14*(NS+2)];

  initial begin
    raw = '0; bitslip = '0; descr = 1'b1;
    for (int d = 0; d < 2; d++) begin
      descr = (d == 0);
      for (int slip = 0; slip < 14; slip++) begin
        for (int m = 0; m < NS; m++) begin
          s[m] = 14'($urandom);
          c[m] = {s[m][13:1] ^ {13{s[m][0]}}, s[m][0]};
        end
        foreach (bits[i]) bits[i] = 1'($urandom);
        for (int m = 0; m < NS; m++)
          for (int b = 0; b < 14; b++) bits[slip + 14*m + b] = c[m][13-b];
        bitslip = 4'(slip);
        rst = 1; @(posedge clk); #1; rst = 0;
        for (int j = 0; j < NS; j++) begin
          for (int b = 0; b < 14; b++) raw[13-b] = bits[14*j + b];
          @(posedge clk); #1;
          if (j >= 1) begin
            chk(sample == (descr ? s[j-1] : c[j-1]),
                $sformatf("slip %0d descr %0d word %0d: got %h", slip, descr, j-1, sample));
            chk(sample_valid == (j >= 1), "sample_valid");
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
