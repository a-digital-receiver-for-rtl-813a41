// Testbench for the register file: configuration write/read-back, gain and
// channel-table write strobes, the re-arm pulse and every meta-data read
// window with its two-clock read latency.
module tb_mc_registers;
  import mwa_pkg::*;
  logic clk = 0, rst = 1, bus_we = 0, bus_re = 0;
  logic [15:0] bus_addr = 0; logic [31:0] bus_wdata = 0, bus_rdata; logic bus_rvalid;
  mode_e mode; diag_t diag; logic [7:0] node_id; logic walsh_en; logic [31:0] adc_thresh, ch_thresh;
  logic [4:0] mon_slot; logic rearm; logic locked = 1;
  logic gain_wr_en [NUM_PIPES]; chan_t gain_wr_chan; logic [GAIN_W-1:0] gain_wr_val;
  logic tbl_wr_en; logic [4:0] tbl_wr_idx; chan_t tbl_wr_chan;
  logic [47:0] adc_power [NUM_PIPES]; logic [31:0] adc_rfi [NUM_PIPES]; logic adc_flag [NUM_PIPES];
  chan_t spec_rd_chan; logic [55:0] spec_power [NUM_PIPES]; logic [31:0] spec_events [NUM_PIPES];
  int checks = 0, failures = 0;
  mc_registers dut (.*);
  always #5 clk = ~clk;
  // registered read ports like the spectrum integrators
  always @(posedge clk) for (int p = 0; p < NUM_PIPES; p++) begin
    spec_power[p]  <= {8'(p), 40'(0), 8'(spec_rd_chan)} + 56'(1 << 40);
    spec_events[p] <= 32'(p * 256) + 32'(spec_rd_chan);
  end
  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    bus_we <= 1; bus_addr <= a; bus_wdata <= d; @(posedge clk); bus_we <= 0;
  endtask
  task automatic rd_chk(input logic [15:0] a, input logic [31:0] e);
    bus_re <= 1; bus_addr <= a; @(posedge clk); bus_re <= 0; @(posedge clk); #1;
    checks++;
    if (!bus_rvalid || bus_rdata != e) begin failures++; $display("addr %h got %h exp %h", a, bus_rdata, e); end
    @(posedge clk);
  endtask
  initial begin
    for (int p = 0; p < NUM_PIPES; p++) begin adc_power[p] = 48'(p) << 32 | 48'(p * 5); adc_rfi[p] = 32'(p + 100); adc_flag[p] = p[0]; end
    repeat (3) @(posedge clk); rst <= 0; @(posedge clk);
    rd_chk(16'h0000, 0);
    wr(16'h0000, 1); wr(16'h0001, 4'b1010); wr(16'h0002, 8'h3C); wr(16'h0003, 1);
    wr(16'h0004, 32'd12345); wr(16'h0005, 32'd777); wr(16'h0006, 5'd9);
    #1; checks++; if (mode != MODE_BURST || diag != 4'b1010 || node_id != 8'h3C || !walsh_en || mon_slot != 9) failures++;
    rd_chk(16'h0000, 1); rd_chk(16'h0002, 8'h3C); rd_chk(16'h0004, 12345); rd_chk(16'h0005, 777); rd_chk(16'h0008, 1);
    // re-arm pulse
    bus_we <= 1; bus_addr <= 16'h0007; @(posedge clk); bus_we <= 0; #1;
    checks++; if (!rearm) failures++;
    @(posedge clk); #1; checks++; if (rearm) failures++;
    // table write strobe
    bus_we <= 1; bus_addr <= 16'h0105; bus_wdata <= 32'd200; @(posedge clk); bus_we <= 0; #1;
    checks++; if (!tbl_wr_en || tbl_wr_idx != 5 || tbl_wr_chan != 200) failures++;
    // gain write strobe on input 9 only
    bus_we <= 1; bus_addr <= 16'h1900 | 16'd77; bus_wdata <= 32'd4321; @(posedge clk); bus_we <= 0; #1;
    checks++;
    for (int p = 0; p < NUM_PIPES; p++) if (gain_wr_en[p] != (p == 9)) failures++;
    if (gain_wr_chan != 77 || gain_wr_val != 4321) failures++;
    // meta-data windows
    for (int p = 0; p < NUM_PIPES; p += 5) begin
      rd_chk(16'h2000 | 16'(4*p), 32'(p * 5));
      rd_chk(16'h2000 | 16'(4*p + 1), 32'(p));
      rd_chk(16'h2000 | 16'(4*p + 2), 32'(p + 100));
      rd_chk(16'h2000 | 16'(4*p + 3), 32'(p % 2));
      rd_chk(16'h4000 | 16'(256*p + 33), 32'd33);
      rd_chk(16'h5000 | 16'(256*p + 33), {8'd0, 8'(p), 16'd1 << 8});
      rd_chk(16'h6000 | 16'(256*p + 201), 32'(p * 256 + 201));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
