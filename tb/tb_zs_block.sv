// tb_zs_block: drives 400 blocks of random quiet data, some with one sample
// above threshold, some with 'force_keep' pulsed on one sample, and a stretch
// with suppression disabled. A reference model decides which aligned blocks
// must be kept; the test checks the kept blocks' samples and time stamps, that
// each kept block starts one clock after its last input sample (one block of
// latency), and that nothing else comes out.
module tb_zs_block;
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
  localparam int BLK = 16, NB = 400, T0 = 1003;
  localparam int NS = NB * BLK;
  logic [13:0] din, thr, dout; logic din_valid, zs_en, force_keep, dout_valid, dout_first;
  ts_t din_ts, dout_ts; logic [31:0] n_kept;
  zs_block #(.BLK(BLK)) dut (.clk, .rst, .din, .din_valid, .din_ts, .threshold(thr), .zs_en,
    .force_keep, .dout, .dout_valid, .dout_first, .dout_ts, .n_kept);

  logic [13:0] smp [NS];
  bit          frc [NS];
  bit          keep_blk [NS];   // indexed by sample index of block start
  int          exp_kept = 0, got_first = 0, out_k = -1, out_pos = 0;
  bit          zs_off [NS];

  initial begin
    din = 0; din_valid = 0; thr = 14'd200; zs_en = 1; force_keep = 0; din_ts = '0;
    for (int i = 0; i < NS; i++) begin smp[i] = 14'(100 + $urandom_range(0, 100)); frc[i] = 0; zs_off[i] = 0; end
    // sample i has time stamp T0+i; aligned blocks start where (T0+i)%BLK==0
    for (int i = 0; i < NS; i++) begin
      int r;
      if ((T0 + i) % BLK != 0 || i + BLK > NS) continue;
      r = $urandom_range(0, 9);
      if (r < 3) smp[i + $urandom_range(0, BLK-1)] = 14'(201 + $urandom_range(0, 5000));
      else if (r < 5) frc[i + $urandom_range(0, BLK-1)] = 1;
      else if (r == 5) smp[i + $urandom_range(0, BLK-1)] = 14'd200;   // equal is not above
    end
    for (int i = 3000; i < 3400; i++) zs_off[i] = 1;
    @(posedge clk); #1; rst = 0;
    for (int i = 0; i < NS; i++) begin
      din = smp[i]; din_valid = 1; din_ts = ts_t'(T0 + i); force_keep = frc[i]; zs_en = !zs_off[i];
      @(posedge clk); #1;
      if (dout_first) begin
        int bs; bit want;
        bs = i - (BLK - 1);
        want = 0;
        for (int k = 0; k < BLK; k++) if (smp[bs+k] > 200 || frc[bs+k] || zs_off[bs+k]) want = 1;
        chk(bs >= 0 && (T0 + bs) % BLK == 0 && want, $sformatf("kept block ending at %0d", i));
        chk(dout_ts == ts_t'(T0 + bs), "block time stamp");
        out_k = bs; out_pos = 0; got_first++;
      end
      if (dout_valid) begin
        chk(out_k >= 0 && dout == smp[out_k + out_pos], $sformatf("sample %0d of block %0d", out_pos, out_k));
        chk(dout_ts == ts_t'(T0 + out_k + out_pos), "sample time stamp");
        out_pos++;
      end
    end
    din_valid = 0;
    for (int i = 0; i < NS; i++) begin
      bit want; want = 0;
      if ((T0 + i) % BLK != 0 || i + BLK > NS) continue;
      for (int k = 0; k < BLK; k++) if (smp[i+k] > 200 || frc[i+k] || zs_off[i+k]) want = 1;
      if (want && i + BLK - 1 < NS - 1) exp_kept++;
    end
    chk(got_first == exp_kept, $sformatf("kept %0d blocks, expected %0d", got_first, exp_kept));
    chk(n_kept >= 32'(got_first), "kept counter");
    $display("kept %0d of %0d blocks", got_first, NB);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
