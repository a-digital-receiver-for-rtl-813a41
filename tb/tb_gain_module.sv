// Testbench for the per-channel gain stage: programs gains from -36 dB to
// +18 dB (and extremes) on random channels, streams frames in the filter-bank
// slot order and checks every product (rounded, saturated) against a model,
// including the output-2 channel mapping.
module tb_gain_module;
  import mwa_pkg::*;
  logic clk = 0, rst = 1, wr_en = 0, in_valid = 0, in_sof = 0;
  chan_t wr_chan; logic [GAIN_W-1:0] wr_gain;
  logic [6:0] in_slot = 0, out_slot; cplx16_t in1, in2, out1, out2;
  logic out_valid, out_sof;
  int checks = 0, failures = 0;
  gain_module dut (.*);
  always #5 clk = ~clk;
  int g [NUM_CH];
  function automatic int model(input int x, input int gg);
    longint p = (longint'(x) * gg + 2048) >>> 12;
    if (p > 32767) p = 32767;
    if (p < -32768) p = -32768;
    return int'(p);
  endfunction
  initial begin
    in1 = '0; in2 = '0;
    for (int c = 0; c < NUM_CH; c++) g[c] = 4096;
    repeat (3) @(posedge clk); rst <= 0;
    for (int c = 0; c < NUM_CH; c += 3) begin
      automatic int gv = (c == 0) ? 65 : (c == 3) ? 32533 : (c == 6) ? 65535 : int'($urandom_range(65, 32533));
      wr_en <= 1; wr_chan <= chan_t'(c); wr_gain <= 16'(gv); g[c] = gv;
      @(posedge clk);
    end
    wr_en <= 0;
    for (int f = 0; f < 3; f++)
      for (int k = 0; k < 128; k++) begin
        automatic int c2 = (k == 0) ? 128 : 256 - k;
        automatic int a = int'($signed(16'($urandom))), b = int'($signed(16'($urandom)));
        automatic int e = int'($signed(16'($urandom))) / 64, d = int'($signed(16'($urandom)));
        in_valid <= 1; in_sof <= (k == 0); in_slot <= 7'(k);
        in1.re <= 16'(a); in1.im <= 16'(b); in2.re <= 16'(e); in2.im <= 16'(d);
        @(posedge clk); #1;
        checks++;
        if (!out_valid || out_slot != 7'(k) || out_sof != (k == 0) ||
            int'(out1.re) != model(a, g[k]) || int'(out1.im) != model(b, g[k]) ||
            int'(out2.re) != model(e, g[c2]) || int'(out2.im) != model(d, g[c2])) begin
          failures++;
          if (failures < 5) $display("k %0d got %0d exp %0d", k, out1.re, model(a, g[k]));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
