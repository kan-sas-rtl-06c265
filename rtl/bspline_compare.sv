// bspline_compare: interval search of the B-spline unit ("Compare").
//
// Finds the index k of the knot interval holding the quantized input,
// t_k <= x_q < t_{k+1}, over the nint intervals of the extended grid
// (nint = G + 2P of the running layer, at most MAX_INT). Every knot
// t_1 .. t_nint is compared with x_q in parallel and the knots passed are
// counted, which for a sorted knot vector is the interval index. An input
// below t_0 gives k = 0 and one at or above t_nint gives k = nint; the align
// stage clips these cases so that every B-spline value comes out zero.
//
// Purely combinational. The paper gives the block's name and function
// (an interval search producing k); the parallel compare-and-count is this
// design's choice.
module bspline_compare #(
  parameter int unsigned MAX_INT = kansas_pkg::MAX_INT,
  parameter int unsigned KW      = $clog2(MAX_INT + 1)
) (
  input  kansas_pkg::xq_t x_q,
  input  kansas_pkg::xq_t knots [MAX_INT+1],
  input  logic [KW-1:0]   nint,
  output logic [KW-1:0]   k
);
  always_comb begin
    k = '0;
    for (int unsigned i = 1; i <= MAX_INT; i++) begin
      if (i <= 32'(nint) && x_q >= knots[i]) k = k + 1'b1;
    end
  end
endmodule
