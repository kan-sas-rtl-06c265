// nm_pe: N:M sparsity-aware weight-stationary vector processing element.
//
// The PE holds all M coefficients c_0 .. c_{M-1} of one input feature for one
// output column (M = G + P). Each cycle it receives the N = P + 1 activations
// that can be non-zero, lane i carrying B_{k-i}, together with their index k.
// An M-to-N multiplexer driven by k picks c_{k-i} for every lane (zero when
// k - i is outside 0 .. M-1), N multipliers form the products and one
// (N+1)-operand adder adds them to the partial sum coming from above:
//
//   psum_out <= psum_in + sum_{i=0}^{N-1} c_{k-i} * a_i
//
// Activations and k are registered and passed to the right neighbour, the
// partial sum is registered and passed down, so a PE adds one cycle in each
// direction. While w_load is high the coefficient register takes w_in (the
// register of the PE above), so coefficients shift down a column one PE per
// cycle; w_out exposes the held coefficients to the PE below.
//
// The datapath (coefficient register, k-driven M-to-N mux, N multipliers,
// adder with psum) follows the paper; the shift-in loading and the
// wrap-around int32 arithmetic are this design's choices.
module nm_pe #(
  parameter int unsigned N  = kansas_pkg::NNZ,
  parameter int unsigned M  = kansas_pkg::NBASIS,
  parameter int unsigned KW = $clog2(M + N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              w_load,
  input  kansas_pkg::coef_t w_in     [M],
  output kansas_pkg::coef_t w_out    [M],
  input  kansas_pkg::act_t  a_in     [N],
  input  logic [KW-1:0]     k_in,
  output kansas_pkg::act_t  a_out    [N],
  output logic [KW-1:0]     k_out,
  input  kansas_pkg::psum_t psum_in,
  output kansas_pkg::psum_t psum_out
);
  import kansas_pkg::*;

  coef_t coef [M];
  coef_t sel  [N];
  psum_t sum;

  // M-to-N multiplexer: lane i needs coefficient c_{k-i}
  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      sel[i] = '0;
      for (int unsigned j = 0; j < M; j++) begin
        if (32'(k_in) == i + j) sel[i] = coef[j];
      end
    end
  end

  // N multipliers and the (N+1)-operand adder
  always_comb begin
    sum = psum_in;
    for (int unsigned i = 0; i < N; i++) begin
      sum = sum + psum_t'(sel[i]) * psum_t'(a_in[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < M; j++) coef[j] <= '0;
      for (int i = 0; i < N; i++) a_out[i] <= '0;
      k_out    <= '0;
      psum_out <= '0;
    end else begin
      if (w_load) coef <= w_in;
      a_out    <= a_in;
      k_out    <= k_in;
      psum_out <= sum;
    end
  end

  assign w_out = coef;
endmodule
