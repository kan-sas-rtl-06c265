// bspline_unit: non-recursive cubic B-spline unit of one array row.
//
// For a quantized input x_q it returns, one cycle later, the only P + 1 = 4
// basis functions that can be non-zero, B_k, B_{k-1}, B_{k-2}, B_{k-3}, and
// their position k among the G + P functions of the layer:
//
//   Compare : k      = interval of x_q in the knot vector
//   Align   : x_addr = clip(nint (x_q - t_0) - 255 k, 0, 255)   (x_a * 255)
//   ~       : 255 - x_addr (bitwise inversion, i.e. 1 - x_a)
//   LUT     : row x_addr  -> B_k = B_{0,3}(x_a),     B_{k-1} = B_{0,3}(x_a + 1)
//             row ~x_addr -> B_{k-3} = B_{0,3}(1-x_a), B_{k-2} = B_{0,3}(2-x_a)
//                            (the second row is packed in reverse order)
//
// Output lane i carries B_{k-i}. A lane whose function index k - i falls
// outside 0 .. G+P-1 (inputs in the grid extension) is forced to zero.
// nint = G + 2P of the running layer is a run-time input no larger than
// MAX_INT; knots[0 .. nint] must be sorted and span 255 codes.
//
// Timing: fully pipelined, one input per cycle, outputs registered
// (latency 1). The structure (compare, align, inversion, shared half table,
// reverse packing) follows the paper, which gives it for P = 3 only; the
// lane zeroing, the output register and the assertions on the knot vector
// are this design's choices.
module bspline_unit #(
  parameter int unsigned MAX_INT = kansas_pkg::MAX_INT,
  parameter int unsigned KW      = $clog2(MAX_INT + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  kansas_pkg::xq_t        x_q,
  input  kansas_pkg::xq_t        knots [MAX_INT+1],
  input  logic [KW-1:0]          nint,
  output logic                   out_valid,
  output kansas_pkg::act_t       out_b [4],
  output logic [KW-1:0]          out_k
);
  import kansas_pkg::*;

  localparam int unsigned P = 3;   // the tabulation scheme is the cubic one
  localparam int unsigned AW = LUT_ADDR_W;

  logic [KW-1:0] k;
  logic [AW-1:0] x_addr, x_addr_inv;
  logic [DATA_W-1:0] lo_a, hi_a, lo_b, hi_b;
  act_t lanes [4];

  bspline_compare #(.MAX_INT(MAX_INT), .KW(KW)) u_compare (
    .x_q(x_q), .knots(knots), .nint(nint), .k(k));

  bspline_align #(.MAX_INT(MAX_INT), .KW(KW), .ADDR_W(AW)) u_align (
    .x_q(x_q), .t0(knots[0]), .nint(nint), .k(k), .x_addr(x_addr));

  assign x_addr_inv = ~x_addr;

  bspline_lut #(.ADDR_W(AW), .VAL_W(DATA_W)) u_lut (
    .addr_a(x_addr), .addr_b(x_addr_inv),
    .lo_a(lo_a), .hi_a(hi_a), .lo_b(lo_b), .hi_b(hi_b));

  // lane i = B_{k-i}; zero when k-i is not a basis function of the layer
  always_comb begin
    logic [KW:0] nbasis;  // G + P = nint - P
    nbasis = (KW+1)'(nint) - (KW+1)'(P);
    lanes[0] = act_t'(lo_a);
    lanes[1] = act_t'(hi_a);
    lanes[2] = act_t'(hi_b);
    lanes[3] = act_t'(lo_b);
    for (int unsigned i = 0; i < 4; i++) begin
      if ((KW+1)'(k) < (KW+1)'(i) || ((KW+1)'(k) - (KW+1)'(i)) >= nbasis)
        lanes[i] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_k     <= '0;
      for (int i = 0; i < 4; i++) out_b[i] <= '0;
    end else begin
      out_valid <= in_valid;
      out_k     <= k;
      out_b     <= lanes;
    end
  end

  // Configuration rules the align formula relies on: at least one interval
  // inside the domain, sorted knots, and a knot vector spanning 255 codes.
  a_nint_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> 32'(nint) >= 2 * P + 1 && 32'(nint) <= MAX_INT)
    else $error("bspline_unit: nint=%0d outside %0d..%0d", nint, 2 * P + 1, MAX_INT);
  a_knot_span: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> 32'(knots[nint]) - 32'(knots[0]) == LUT_DEPTH - 1)
    else $error("bspline_unit: knot vector does not span %0d codes", LUT_DEPTH - 1);
  for (genvar i = 1; i <= MAX_INT; i++) begin : g_sorted
    a_knots_sorted: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid && 32'(nint) >= i |-> knots[i] >= knots[i-1])
      else $error("bspline_unit: knots %0d and %0d out of order", i - 1, i);
  end
endmodule
