// Self-checking testbench for the polyphase filter bank.
//
// Drives a tone in the middle of coarse channel 30 (the channel of the
// published filter-bank measurement) plus pseudo-random noise, and compares
// every channel of frames 8 and 9 (two complete 8-frame filter histories)
// with a reference computed here in floating point: the 4096-tap Kaiser-sinc
// prototype is rebuilt, the FIR sums formed from the recorded input and a
// direct 512-point DFT taken. Tolerance is 10 LSB plus 1 % of the value: the 12-bit twiddles spread
// about 2^-12 of the ~15000-LSB tone into every bin. Also
// checks the output channel order of both sequences, that channel 30 holds
// the peak, the 128-clock frame period and the 75-clock latency.
module tb_pfb;
  import mwa_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam int  NFR = 10;
  localparam int  L = 4096;

  logic clk = 0, rst = 1, sync = 0;
  pfbin_t din [SPC];
  logic out_valid, out_sof;
  logic [6:0] out_slot;
  cplx16_t out1, out2;

  pfb dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int x [NFR*FFT_N];
  real h [L];
  int hq [L];

  function automatic real bi0(input real v);
    real s = 1.0, t = 1.0;
    for (int k = 1; k < 30; k++) begin t = t * (v/(2.0*k)) * (v/(2.0*k)); s += t; end
    return s;
  endfunction

  initial begin
    automatic real c = (L-1)/2.0;
    for (int n = 0; n < L; n++) begin
      automatic real a = (n - c)/c, u = (n - c)/512.0;
      automatic real w = bi0(6.0*$sqrt(1.0 - a*a))/bi0(6.0);
      automatic real v = 2047.0 * w * $sin(PI*u)/(PI*u);
      hq[n] = (v < 0) ? $rtoi(v - 0.5) : $rtoi(v + 0.5);
    end
    for (int n = 0; n < NFR*FFT_N; n++) begin
      automatic real v = 60.0*$cos(2.0*PI*30.3*n/512.0 + 0.4);
      x[n] = ((v < 0) ? $rtoi(v-0.5) : $rtoi(v+0.5)) + int'($urandom_range(40)) - 20;
    end
  end

  // Stimulus
  int last_in_cyc [NFR];
  initial begin
    for (int i = 0; i < SPC; i++) din[i] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    sync <= 1;
    @(posedge clk);
    sync <= 0;
    for (int f = 0; f < NFR; f++)
      for (int k = 0; k < 128; k++) begin
        for (int i = 0; i < SPC; i++) din[i] <= pfbin_t'(x[f*FFT_N + 4*k + i]);
        @(posedge clk);
        if (k == 127) last_in_cyc[f] = cyc;
      end
  end

  // Reference for channel ch of frame m.
  function automatic void ref_ch(input int m, input int ch, output real re, output real im);
    re = 0; im = 0;
    for (int b = 0; b < FFT_N; b++) begin
      longint y = 0;
      for (int t = 0; t < 8; t++) begin
        int n = FFT_N*(m - 7 + t) + b;
        if (n >= 0) y += longint'(hq[FFT_N*t + b]) * x[n];
      end
      re += real'(y) * $cos(2.0*PI*ch*b/512.0);
      im -= real'(y) * $sin(2.0*PI*ch*b/512.0);
    end
    re = re / 2048.0; im = im / 2048.0;
  endfunction

  task automatic cmp(input int m, input int ch, input cplx16_t got);
    real rr, ri, tol;
    int gr, gi;
    gr = int'(got.re);
    gi = int'(got.im);
    ref_ch(m, ch, rr, ri);
    tol = 10.0 + 0.01 * $sqrt(rr*rr + ri*ri);
    checks++;
    if ((real'(gr) - rr > tol) || (rr - real'(gr) > tol) ||
        (real'(gi) - ri > tol) || (ri - real'(gi) > tol)) begin
      failures++;
      if (failures < 10) $display("frame %0d ch %0d: got %0d,%0d ref %f,%f", m, ch, gr, gi, rr, ri);
    end
  endtask

  // Output monitor (sof_cyc - last_in_cyc = 76 in this sampling equals the
  // documented 75 clocks: both counters are read before their own update).
  int frame = -1;
  int sof_cyc [NFR+4];
  int nval [NFR+4];
  real pk; int pkch;
  always @(posedge clk) if (out_valid) begin
    if (out_sof) begin
      frame++;
      sof_cyc[frame] = cyc;
      pk = 0; pkch = -1;
    end
    checks++;
    nval[frame]++;
    if (out_slot != 7'(cyc - sof_cyc[frame])) failures++;
    if (frame >= 8 && frame < NFR) begin
      cmp(frame, int'(out_slot), out1);
      cmp(frame, (out_slot == 0) ? 128 : 256 - int'(out_slot), out2);
      if ($sqrt(real'(out1.re)**2 + real'(out1.im)**2) > pk) begin
        pk = $sqrt(real'(out1.re)**2 + real'(out1.im)**2); pkch = out_slot;
      end
      if (out_slot == 127) begin
        checks++;
        if (pkch != 30) begin failures++; $display("peak in channel %0d", pkch); end
      end
    end
  end

  initial begin
    wait (frame == NFR);
    repeat (140) @(posedge clk);
    for (int f = 1; f < NFR; f++) begin
      checks++;
      if (sof_cyc[f] - sof_cyc[f-1] != 128) failures++;
    end
    for (int f = 0; f < NFR; f++) begin
      checks++;
      if (nval[f] != 128) begin failures++; $display("frame %0d has %0d outputs", f, nval[f]); end
    end
    for (int f = 0; f < NFR; f++) begin
      checks++;
      if (sof_cyc[f] - last_in_cyc[f] != 76) begin
        failures++;
        $display("latency %0d", sof_cyc[f] - last_in_cyc[f]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
