// row_input_sel: per-row choice between the KAN and the MLP operand stream.
//
// In KAN mode a row of N:M PEs is fed by its B-spline unit: the N lanes
// B_{k-i} and their index k pass unchanged. In MLP mode (plain DNN layers,
// or the ReLU "bias" branch w_b * b(x) of a KAN layer) the row takes N raw
// int8 activations a_0 .. a_{N-1}, optionally through a ReLU. They are packed
// in reverse (lane i = a_{N-1-i}) and k is forced to N-1, so the PE's
// multiplexer selects c_{N-1-i} for lane i and computes sum_j c_j a_j: each
// PE acts as an N-wide dot product over its first N coefficients.
//
// Combinational. The paper states that the array also runs MLP layers and
// that a row then takes N activations; how the operands are routed (this
// bypass and the forced k) is this design's choice.
module row_input_sel #(
  parameter int unsigned N  = kansas_pkg::NNZ,
  parameter int unsigned KW = $clog2(kansas_pkg::NBASIS + N)
) (
  input  kansas_pkg::mode_t mode,
  input  logic              relu_en,
  input  kansas_pkg::act_t  kan_b [N],
  input  logic [KW-1:0]     kan_k,
  input  kansas_pkg::act_t  mlp_a [N],
  output kansas_pkg::act_t  lanes [N],
  output logic [KW-1:0]     k
);
  import kansas_pkg::*;

  always_comb begin
    if (mode == MODE_KAN) begin
      lanes = kan_b;
      k     = kan_k;
    end else begin
      for (int unsigned i = 0; i < N; i++) begin
        lanes[i] = (relu_en && mlp_a[N-1-i] < 0) ? act_t'(0) : mlp_a[N-1-i];
      end
      k = KW'(N - 1);
    end
  end
endmodule
