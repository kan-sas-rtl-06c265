// bspline_align: LUT address of the B-spline unit ("Align").
//
// Maps the quantized input onto the cardinal B-spline of its interval and
// quantizes the aligned input x_a = (x - t_0)/Delta - k in [0, 1] to the
// table address range 0..255:
//
//   x_addr = clip( nint * (x_q - t_0) - 255 * k, 0, 255 ),  nint = G + 2P
//
// This is the formula of the paper; it assumes the quantized knot vector
// spans 255 codes (t_nint - t_0 = 255), which an affine quantization of the
// grid range gives. The clip absorbs knots that were rounded to integer
// codes and inputs outside the grid. Combinational; 24-bit signed
// intermediates are this design's choice.
module bspline_align #(
  parameter int unsigned MAX_INT = kansas_pkg::MAX_INT,
  parameter int unsigned KW      = $clog2(MAX_INT + 1),
  parameter int unsigned ADDR_W  = kansas_pkg::LUT_ADDR_W
) (
  input  kansas_pkg::xq_t   x_q,
  input  kansas_pkg::xq_t   t0,
  input  logic [KW-1:0]     nint,
  input  logic [KW-1:0]     k,
  output logic [ADDR_W-1:0] x_addr
);
  localparam int MAXCODE = (1 << ADDR_W) - 1;

  logic signed [23:0] diff, scaled, offset, raw;

  always_comb begin
    diff   = 24'(signed'({1'b0, x_q})) - 24'(signed'({1'b0, t0}));
    scaled = diff * 24'(signed'({1'b0, nint}));
    offset = 24'(MAXCODE) * 24'(signed'({1'b0, k}));
    raw    = scaled - offset;
    if (raw < 0)                 x_addr = '0;
    else if (raw > 24'(MAXCODE)) x_addr = ADDR_W'(MAXCODE);
    else                         x_addr = raw[ADDR_W-1:0];
  end
endmodule
