// Testbench for the requantiser: symmetric rounding (halves away from zero)
// and saturation to -15..15, checked against an integer model on edge values
// and random inputs.
module tb_requantizer;
  import mwa_pkg::*;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  logic [4:0] in_slot = 0, out_slot;
  cplx16_t din; cplx5_t dout;
  int checks = 0, failures = 0;
  requantizer dut (.*);
  always #5 clk = ~clk;
  function automatic int model(input int x);
    int m = (x < 0) ? -x : x;
    int r = (m + 128) / 256;
    if (r > 15) r = 15;
    return (x < 0) ? -r : r;
  endfunction
  int vals [12] = '{0, 127, 128, -128, -127, 383, -384, 3967, 3968, -3968, 32767, -32768};
  initial begin
    din = '0;
    repeat (3) @(posedge clk); rst <= 0;
    for (int k = 0; k < 600; k++) begin
      automatic int a = (k < 12) ? vals[k] : int'($signed(16'($urandom)));
      automatic int b = (k < 12) ? vals[11 - k] : int'($signed(16'($urandom))) / ((k % 3) * 20 + 1);
      din.re <= 16'(a); din.im <= 16'(b); in_valid <= 1; in_slot <= 5'(k);
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_slot != 5'(k) || int'(dout.re) != model(a) || int'(dout.im) != model(b)) begin
        failures++; $display("%0d %0d -> %0d %0d", a, b, dout.re, dout.im);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
