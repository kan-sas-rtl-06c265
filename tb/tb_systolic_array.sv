// tb_systolic_array: a 5 x 4 array of 4:8 PEs. Coefficients are shifted in
// (bottom row first); then 60 operand vectors with random lanes and indices
// are streamed back to back, row r skewed by r cycles. Column c must show
// the result of vector v exactly R + c cycles after row 0 of v entered:
//   psum[c] = sum_r sum_i c[r][c][k_r - i] * a[r][i].
module tb_systolic_array;
  import kansas_pkg::*;

  localparam int unsigned R = 5, C = 4;
  localparam int unsigned N = kansas_pkg::NNZ, M = kansas_pkg::NBASIS;
  localparam int V = 60;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, w_load = 0;
  coef_t w_top [C][M];
  act_t a_left [R][N];
  logic [3:0] k_left [R];
  psum_t psum_bottom [C];

  coef_t cw [R][C][M];
  act_t  va [V][R][N];
  int    vk [V][R];
  longint expv [V][C];

  systolic_array #(.R(R), .C(C)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    for (int r = 0; r < int'(R); r++) begin
      for (int i = 0; i < int'(N); i++) a_left[r][i] = '0;
      k_left[r] = '0;
    end
    for (int c = 0; c < int'(C); c++) for (int m = 0; m < int'(M); m++) begin
      w_top[c][m] = '0;
      for (int r = 0; r < int'(R); r++) cw[r][c][m] = coef_t'($urandom);
    end
    for (int v = 0; v < V; v++) begin
      for (int c = 0; c < int'(C); c++) expv[v][c] = 0;
      for (int r = 0; r < int'(R); r++) begin
        vk[v][r] = $urandom_range(0, int'(M + N - 1));
        for (int i = 0; i < int'(N); i++) va[v][r][i] = act_t'($urandom);
        for (int c = 0; c < int'(C); c++)
          for (int i = 0; i < int'(N); i++)
            if (vk[v][r] - i >= 0 && vk[v][r] - i < int'(M))
              expv[v][c] += longint'(cw[r][c][vk[v][r] - i]) * longint'(va[v][r][i]);
      end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // coefficient load: bottom row first
    for (int step = 0; step < int'(R); step++) begin
      w_load = 1;
      for (int c = 0; c < int'(C); c++) w_top[c] = cw[R - 1 - step][c];
      @(negedge clk);
    end
    w_load = 0;
    s = 0;
    for (int n = 0; n < V + int'(R + C) + 2; n++) begin
      // present operands for this cycle
      for (int r = 0; r < int'(R); r++) begin
        int v;
        v = n - r;
        if (v >= 0 && v < V) begin
          a_left[r] = va[v][r];
          k_left[r] = 4'(vk[v][r]);
        end else begin
          for (int i = 0; i < int'(N); i++) a_left[r][i] = '0;
          k_left[r] = '0;
        end
      end
      // results visible during this cycle
      for (int c = 0; c < int'(C); c++) begin
        int v;
        v = n - int'(R) - c;
        if (v >= 0 && v < V) begin
          checks++;
          if (longint'(psum_bottom[c]) != longint'(psum_t'(expv[v][c]))) begin
            failures++;
            if (failures < 20) $display("FAIL v=%0d c=%0d got %0d exp %0d", v, c, psum_bottom[c], expv[v][c]);
          end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
