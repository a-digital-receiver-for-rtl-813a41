// Monitor-and-control register file.
//
// The single-board computer controls the receiver through a USB FIFO chip
// and a CPLD that talk to the FPGAs over a parallel I/O port. This block is
// the FPGA side of that port: it holds the operating registers set during
// initialisation (receiver ID, digitiser thresholds, per-channel gains, the
// channel selection, the mode) and makes the one-second meta-data readable.
// The register contents follow the source description's initialisation and
// meta-data lists; the parallel-port protocol is not published, so the bus
// below (one-clock write strobe, read strobe answered two clocks later with
// rvalid) and the address map are this design's choices.
//
// Address map (16-bit word addresses, 32-bit data):
//   0x0000 mode (0 channel, 1 burst, 2 raw)   0x0001 diag {fiber,agg,pfb,adc}
//   0x0002 node id [7:0]                      0x0003 Walsh enable
//   0x0004 ADC power threshold                0x0005 channel power threshold
//   0x0006 monitored sky-band slot (0..23)    0x0007 write: re-arm sync
//   0x0008 read: sync locked
//   0x0100+i        channel selection slot i -> channel (write)
//   0x1000+256p+c   gain of channel c, input p (write, 4096 = 0 dB)
//   0x2000+4p+w     input p: w=0/1 one-second power low/high word,
//                   w=2 time-domain RFI count, w=3 RFI flag (read)
//   0x4000+256p+c   integrated power of channel c, input p, low word (read)
//   0x5000+256p+c   same, high word (read)
//   0x6000+256p+c   RFI event count of channel c, input p (read)
module mc_registers
  import mwa_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        bus_we,
  input  logic        bus_re,
  input  logic [15:0] bus_addr,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  output logic        bus_rvalid,
  // configuration
  output mode_e       mode,
  output diag_t       diag,
  output logic [7:0]  node_id,
  output logic        walsh_en,
  output logic [31:0] adc_thresh,
  output logic [31:0] ch_thresh,
  output logic [4:0]  mon_slot,
  output logic        rearm,
  input  logic        locked,
  output logic        gain_wr_en [NUM_PIPES],
  output chan_t       gain_wr_chan,
  output logic [GAIN_W-1:0] gain_wr_val,
  output logic        tbl_wr_en,
  output logic [4:0]  tbl_wr_idx,
  output chan_t       tbl_wr_chan,
  // meta-data
  input  logic [47:0] adc_power  [NUM_PIPES],
  input  logic [31:0] adc_rfi    [NUM_PIPES],
  input  logic        adc_flag   [NUM_PIPES],
  output chan_t       spec_rd_chan,
  input  logic [55:0] spec_power [NUM_PIPES],
  input  logic [31:0] spec_events[NUM_PIPES]
);
  logic        ren_d;
  logic [15:0] raddr;

  assign spec_rd_chan = chan_t'(bus_addr[7:0]);

  always_ff @(posedge clk) begin
    if (rst) begin
      mode        <= MODE_CHANNEL;
      diag        <= '0;
      node_id     <= '0;
      walsh_en    <= 1'b0;
      adc_thresh  <= '1;
      ch_thresh   <= '1;
      mon_slot    <= '0;
      rearm       <= 1'b0;
      tbl_wr_en   <= 1'b0;
      tbl_wr_idx  <= '0;
      tbl_wr_chan <= '0;
      gain_wr_chan <= '0;
      gain_wr_val <= '0;
      for (int p = 0; p < NUM_PIPES; p++) gain_wr_en[p] <= 1'b0;
    end else begin
      rearm     <= 1'b0;
      tbl_wr_en <= 1'b0;
      for (int p = 0; p < NUM_PIPES; p++) gain_wr_en[p] <= 1'b0;
      if (bus_we) begin
        case (bus_addr[15:12])
          4'h0: begin
            if (bus_addr[11:8] == 4'h1) begin
              tbl_wr_en   <= 1'b1;
              tbl_wr_idx  <= bus_addr[4:0];
              tbl_wr_chan <= chan_t'(bus_wdata);
            end else if (bus_addr[11:8] == 4'h0) begin
              case (bus_addr[7:0])
                8'h00: mode       <= mode_e'(bus_wdata[1:0]);
                8'h01: diag       <= diag_t'(bus_wdata[3:0]);
                8'h02: node_id    <= bus_wdata[7:0];
                8'h03: walsh_en   <= bus_wdata[0];
                8'h04: adc_thresh <= bus_wdata;
                8'h05: ch_thresh  <= bus_wdata;
                8'h06: mon_slot   <= bus_wdata[4:0];
                8'h07: rearm      <= 1'b1;
                default: ;
              endcase
            end
          end
          4'h1: begin
            gain_wr_en[bus_addr[11:8]] <= 1'b1;
            gain_wr_chan <= chan_t'(bus_addr[7:0]);
            gain_wr_val  <= bus_wdata[GAIN_W-1:0];
          end
          default: ;
        endcase
      end
    end
  end

  // Read path: address captured with the strobe, answer one clock later
  // (after the spectrum integrators' registered read ports).
  always_ff @(posedge clk) begin
    if (rst) begin
      ren_d      <= 1'b0;
      raddr      <= '0;
      bus_rvalid <= 1'b0;
      bus_rdata  <= '0;
    end else begin
      ren_d      <= bus_re;
      raddr      <= bus_addr;
      bus_rvalid <= ren_d;
      if (ren_d) begin
        case (raddr[15:12])
          4'h0: case (raddr[11:0])
                  12'h000: bus_rdata <= 32'(mode);
                  12'h001: bus_rdata <= 32'(diag);
                  12'h002: bus_rdata <= 32'(node_id);
                  12'h003: bus_rdata <= 32'(walsh_en);
                  12'h004: bus_rdata <= adc_thresh;
                  12'h005: bus_rdata <= ch_thresh;
                  12'h006: bus_rdata <= 32'(mon_slot);
                  12'h008: bus_rdata <= 32'(locked);
                  default: bus_rdata <= '0;
                endcase
          4'h2: case (raddr[1:0])
                  2'd0: bus_rdata <= adc_power[raddr[5:2]][31:0];
                  2'd1: bus_rdata <= 32'(adc_power[raddr[5:2]][47:32]);
                  2'd2: bus_rdata <= adc_rfi[raddr[5:2]];
                  default: bus_rdata <= 32'(adc_flag[raddr[5:2]]);
                endcase
          4'h4: bus_rdata <= spec_power[raddr[11:8]][31:0];
          4'h5: bus_rdata <= 32'(spec_power[raddr[11:8]][55:32]);
          4'h6: bus_rdata <= spec_events[raddr[11:8]];
          default: bus_rdata <= '0;
        endcase
      end
    end
  end
endmodule
