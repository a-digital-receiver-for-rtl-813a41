// Requantiser: 16+16-bit complex channel samples to 5+5 bits.
//
// Each component is divided by 2^SHIFT (the fixed "quantiser window") with
// symmetric round-off, i.e. halves are rounded away from zero so positive and
// negative values are treated alike, and the result is saturated to the
// symmetric range -15..+15. Symmetric rounding and saturation follow the source
// description; the window position SHIFT and the symmetric (rather than
// -16..+15) clip range are this design's choices. The per-channel gain ahead
// of this block is what sets the bit occupancy.
//
// Interface: in_valid/in_slot/din, registered to out_* one clock later.
module requantizer
  import mwa_pkg::*;
#(
  parameter int unsigned SHIFT = QUANT_SHIFT
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic [4:0]  in_slot,
  input  cplx16_t     din,
  output logic        out_valid,
  output logic [4:0]  out_slot,
  output cplx5_t      dout
);
  localparam int MAXV = (1 << (QUANT_W - 1)) - 1;   // 15

  function automatic logic signed [QUANT_W-1:0] rq(input logic signed [PFB_OUT_W-1:0] x);
    logic [PFB_OUT_W-1:0] mag;
    logic [PFB_OUT_W:0]   r;
    mag = x[PFB_OUT_W-1] ? PFB_OUT_W'(-x) : x;     // |x|, -32768 -> 32768 as unsigned
    r   = ({1'b0, mag} + (17'(1) << (SHIFT - 1))) >> SHIFT;
    if (r > 17'(MAXV)) r = 17'(MAXV);
    return x[PFB_OUT_W-1] ? -QUANT_W'(r) : QUANT_W'(r);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_slot  <= '0;
      dout      <= '0;
    end else begin
      out_valid <= in_valid;
      out_slot  <= in_slot;
      dout.re   <= rq(din.re);
      dout.im   <= rq(din.im);
    end
  end
endmodule
