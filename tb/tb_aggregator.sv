// Testbench for the aggregator: random 5+5-bit sky-band frames from all 16
// inputs; every fibre packet is checked word by word against the documented
// layout (marker, node/fibre, time-stamp, sequence number, reordered payload,
// checksum), and its length and the packet rate are checked.
module tb_aggregator;
  import mwa_pkg::*;
  localparam int NF = 4;
  logic clk = 0, rst = 1, sync = 0;
  logic [7:0] node_id = 8'h5A;
  logic in_valid [NUM_PIPES]; logic [4:0] in_slot [NUM_PIPES]; cplx5_t in_data [NUM_PIPES];
  logic [FIBER_W-1:0] fib_data [NUM_FIBERS];
  logic fib_valid [NUM_FIBERS], fib_sop [NUM_FIBERS], fib_eop [NUM_FIBERS];
  int checks = 0, failures = 0;
  aggregator dut (.*);
  always #5 clk = ~clk;
  logic [9:0] d [NF][NUM_PIPES][NUM_SEL];
  initial begin
    for (int f = 0; f < NF; f++) for (int p = 0; p < NUM_PIPES; p++) for (int s = 0; s < NUM_SEL; s++) d[f][p][s] = 10'($urandom);
    for (int p = 0; p < NUM_PIPES; p++) begin in_valid[p] = 0; in_slot[p] = 0; in_data[p] = 0; end
    repeat (3) @(posedge clk); rst <= 0;
    sync <= 1; @(posedge clk); sync <= 0;
    for (int f = 0; f < NF; f++) begin
      for (int k = 0; k < 128; k++) begin
        for (int p = 0; p < NUM_PIPES; p++) begin
          in_valid[p] <= (k >= 10 && k < 10 + NUM_SEL);
          in_slot[p]  <= 5'(k - 10);
          in_data[p]  <= (k >= 10 && k < 10 + NUM_SEL) ? cplx5_t'(d[f][p][k - 10]) : '0;
        end
        @(posedge clk);
      end
    end
    repeat (200) @(posedge clk);
    for (int fi = 0; fi < NUM_FIBERS; fi++) begin
      checks++;
      if (npk[fi] != NF) begin failures++; $display("fibre %0d packets %0d", fi, npk[fi]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // expected word w of packet number n on fibre fi
  function automatic logic [15:0] expw(input int fi, input int n, input int w);
    logic [1279:0] pl;
    for (int c = 0; c < 8; c++) for (int p = 0; p < NUM_PIPES; p++) pl[10*(16*c+p) +: 10] = d[n][p][8*fi+c];
    case (w)
      0: return 16'h4D57;
      1: return {8'h5A, 6'b0, 2'(fi)};
      2: return 16'd1;                    // one sync pulse seen
      3: return 16'd0;
      4: return 16'(n);
      5: return 16'(n);
      default: return pl[16*(w-6) +: 16];
    endcase
  endfunction
  int npk [NUM_FIBERS] = '{0, 0, 0};
  int wi  [NUM_FIBERS];
  logic [15:0] cs [NUM_FIBERS];
  for (genvar fi = 0; fi < NUM_FIBERS; fi++) begin : g_mon
    always @(posedge clk) if (!rst && fib_valid[fi]) begin
      if (fib_sop[fi]) begin wi[fi] = 0; cs[fi] = 0; end
      checks++;
      if (wi[fi] < 86) begin
        if (fib_data[fi] != expw(fi, npk[fi], wi[fi])) begin
          failures++; if (failures < 6) $display("f%0d pk%0d w%0d got %h exp %h", fi, npk[fi], wi[fi], fib_data[fi], expw(fi, npk[fi], wi[fi]));
        end
        cs[fi] = cs[fi] + fib_data[fi];
      end else begin
        if (fib_data[fi] != cs[fi] || !fib_eop[fi] || wi[fi] != 86) begin failures++; $display("checksum/eop"); end
        npk[fi]++;
      end
      wi[fi]++;
    end
  end
  initial begin repeat (3000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
