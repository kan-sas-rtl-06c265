// tb_nm_pe: loads random coefficients into one N:M PE, then applies random
// activations, indices k (including indices whose window leaves 0..M-1) and
// partial sums, and checks after each edge
//   psum_out = psum_in + sum_i c_{k-i} a_i   (zero for k-i outside 0..M-1),
// the forwarding of a and k to the right, and that coefficients stay put
// while w_load is low.
module tb_nm_pe;
  import kansas_pkg::*;

  localparam int unsigned N = kansas_pkg::NNZ;
  localparam int unsigned M = kansas_pkg::NBASIS;
  int checks = 0, failures = 0, n_edge = 0;
  logic clk = 0, rst_n = 0, w_load = 0;
  coef_t w_in [M], w_out [M];
  act_t a_in [N], a_out [N];
  logic [3:0] k_in, k_out;
  psum_t psum_in, psum_out;
  coef_t c_ref [M];

  nm_pe dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < int'(M); j++) w_in[j] = '0;
    for (int i = 0; i < int'(N); i++) a_in[i] = '0;
    k_in = 0; psum_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      // load a new coefficient set
      @(negedge clk);
      w_load = 1;
      for (int j = 0; j < int'(M); j++) begin
        w_in[j]  = coef_t'($urandom);
        c_ref[j] = w_in[j];
      end
      @(negedge clk);
      w_load = 0;
      for (int j = 0; j < int'(M); j++) begin
        check("w_out", longint'(w_out[j]), longint'(c_ref[j]));
        w_in[j] = coef_t'($urandom);   // must be ignored
      end
      for (int n = 0; n < 200; n++) begin
        longint e;
        int kk;
        kk = $urandom_range(0, int'(M + N - 1));
        k_in = 4'(kk);
        psum_in = psum_t'($urandom);
        for (int i = 0; i < int'(N); i++) a_in[i] = act_t'($urandom);
        e = longint'(psum_in);
        for (int i = 0; i < int'(N); i++) begin
          if (kk - i >= 0 && kk - i < int'(M)) e += longint'(c_ref[kk - i]) * longint'(a_in[i]);
          else n_edge++;
        end
        @(negedge clk);
        check("psum_out", longint'(psum_out), longint'(psum_t'(e)));
        check("k_out", longint'(k_out), longint'(kk));
        for (int i = 0; i < int'(N); i++) check("a_out", longint'(a_out[i]), longint'(a_in[i]));
      end
    end
    checks++;
    if (n_edge == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
