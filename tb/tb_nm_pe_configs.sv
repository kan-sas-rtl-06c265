// tb_nm_pe_configs: the N:M processing element at the six sparsity patterns
// 1:1 (scalar), 1:2, 2:4, 2:6, 4:6 and 4:8. Each instance gets its own random
// coefficients, then random activations, indices k over 0 .. M+N-1 and
// partial sums; after every edge psum_out must equal
// psum_in + sum_i c_{k-i} a_i (zero outside 0..M-1).
module tb_nm_pe_configs;
  import kansas_pkg::*;

  localparam int NCFG = 6;
  localparam int CFG_N [NCFG] = '{1, 1, 2, 2, 4, 4};
  localparam int CFG_M [NCFG] = '{1, 2, 4, 6, 6, 8};

  int checks = 0, failures = 0, done = 0;
  logic clk = 0, rst_n = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int N = CFG_N[g], M = CFG_M[g], KW = $clog2(M + N);
    logic w_load = 0;
    coef_t w_in [M], w_out [M], c_ref [M];
    act_t a_in [N], a_out [N];
    logic [KW-1:0] k_in, k_out;
    psum_t psum_in, psum_out;

    nm_pe #(.N(N), .M(M)) u_pe (.*);

    initial begin
      for (int j = 0; j < M; j++) w_in[j] = '0;
      for (int i = 0; i < N; i++) a_in[i] = '0;
      k_in = '0; psum_in = '0;
      @(posedge rst_n);
      @(negedge clk);
      w_load = 1;
      for (int j = 0; j < M; j++) begin
        w_in[j] = coef_t'($urandom);
        c_ref[j] = w_in[j];
      end
      @(negedge clk);
      w_load = 0;
      for (int n = 0; n < 500; n++) begin
        longint e;
        int kk;
        kk = $urandom_range(0, M + N - 1);
        k_in = KW'(kk);
        psum_in = psum_t'($urandom);
        for (int i = 0; i < N; i++) a_in[i] = act_t'($urandom);
        e = longint'(psum_in);
        for (int i = 0; i < N; i++)
          if (kk - i >= 0 && kk - i < M) e += longint'(c_ref[kk - i]) * longint'(a_in[i]);
        @(negedge clk);
        checks++;
        if (longint'(psum_out) != longint'(psum_t'(e))) begin
          failures++;
          if (failures < 20) $display("FAIL %0d:%0d k=%0d got %0d exp %0d", N, M, kk, psum_out, psum_t'(e));
        end
      end
      done++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (done == NCFG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
