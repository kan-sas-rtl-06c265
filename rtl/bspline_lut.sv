// bspline_lut: half-cubic B-spline table with two read ports.
//
// Because the cardinal cubic B-spline B_{0,3} is symmetric about 2, only its
// left half [0, 2] is stored. Each of the 256 rows a holds two values for
// x_a = a / 255:
//
//   lo[a] = B_{0,3}(x_a)      = x_a^3 / 6
//   hi[a] = B_{0,3}(x_a + 1)  = (-3 x_a^3 + 3 x_a^2 + 3 x_a + 1) / 6
//
// scaled so that the peak B_{0,3}(2) = 2/3 reads 127 (value = round(B * 190.5),
// halves rounded up); row 0 is therefore (0, 32) and row 255 is (32, 127).
// The table is computed at elaboration by an integer constant function, so it
// synthesizes to a ROM. Port a is read at x_addr and port b at the inverted
// address; both reads are combinational.
//
// The storage scheme (two values per row, inverted second read) and the end
// rows follow the paper; the exact scale and rounding are this design's
// reading of the rows the paper prints.
module bspline_lut #(
  parameter int unsigned ADDR_W = kansas_pkg::LUT_ADDR_W,
  parameter int unsigned VAL_W  = kansas_pkg::DATA_W
) (
  input  logic [ADDR_W-1:0] addr_a,
  input  logic [ADDR_W-1:0] addr_b,
  output logic [VAL_W-1:0]  lo_a,
  output logic [VAL_W-1:0]  hi_a,
  output logic [VAL_W-1:0]  lo_b,
  output logic [VAL_W-1:0]  hi_b
);
  localparam int unsigned DEPTH = 1 << ADDR_W;

  typedef logic [2*VAL_W-1:0] rom_t [DEPTH];  // {hi, lo}

  // value = round(num / (6 D^3) * 381 / 2) with D = DEPTH - 1
  //       = floor((num * 762 + 12 D^3) / (24 D^3))
  function automatic rom_t gen_rom();
    rom_t r;
    longint d, a, d3, lo_num, hi_num, lo_v, hi_v;
    d  = longint'(DEPTH) - 1;
    d3 = d * d * d;
    for (int unsigned i = 0; i < DEPTH; i++) begin
      a      = longint'(i);
      lo_num = a * a * a;
      hi_num = -3 * a * a * a + 3 * a * a * d + 3 * a * d * d + d3;
      lo_v   = (lo_num * 762 + 12 * d3) / (24 * d3);
      hi_v   = (hi_num * 762 + 12 * d3) / (24 * d3);
      r[i]   = {VAL_W'(hi_v), VAL_W'(lo_v)};
    end
    return r;
  endfunction

  localparam rom_t ROM = gen_rom();

  always_comb begin
    {hi_a, lo_a} = ROM[addr_a];
    {hi_b, lo_b} = ROM[addr_b];
  end
endmodule
