// kan_layer_check: runs one complete KAN layer (Eq.: out = sum_f phi_f(x_f)
// + sum_f w_b relu(x_f)) on kansas_top by tiling, and checks every output.
//
// The layer has K input features, NOUT outputs, grid G_L (<= the core's G)
// and cubic splines. The spline term is run as ceil(K/R) x ceil(NOUT/C)
// KAN passes: each pass loads the M = G + P coefficients of R features for C
// outputs (slots at or above G_L + P stay zero), streams the batch and
// accumulates into the accumulator entry of each batch element. The ReLU
// term runs as MLP passes covering R*N features each, accumulated on top.
// The MLP operand of feature f is relu(x_f - 128) (the input with its
// zero-point removed). Every output is read back and compared with a
// reference that evaluates the B-splines by the Cox-de Boor recursion.
// The number of array passes is compared with ceil(K/R) ceil(NOUT/C) for the
// spline term, against ceil(K (G_L+P) / R) ceil(NOUT/C) passes a scalar-PE
// array of the same R x C would need. The enclosing testbench collects the
// check counts once done is set.
module kan_layer_check #(
  parameter int G_HW = kansas_pkg::GRID_G,   // grid size the core is built for
  parameter int G_L  = 5,                    // grid size of the layer
  parameter int K    = 22,
  parameter int NOUT = 60,
  parameter int BS   = 8,
  parameter string NAME = "layer"
) (
  output int checks,
  output int failures,
  output bit done
);
  import kansas_pkg::*;
  import kan_ref_pkg::*;

  localparam int R = kansas_pkg::ROWS, C = kansas_pkg::COLS, P = 3;
  localparam int N = P + 1, M = G_HW + P, MI = G_HW + 2 * P;
  localparam int KW = $clog2(MI + 1), AW = $clog2(kansas_pkg::ACC_DEPTH);
  localparam int NINT = G_L + 2 * P;
  localparam int KT = (K + R - 1) / R, CT = (NOUT + C - 1) / C, BT = (K + R * N - 1) / (R * N);

  int passes = 0, n_ext = 0;
  logic clk = 0, rst_n = 0;
  xq_t cfg_knots [MI+1];
  logic [KW-1:0] cfg_nint;
  logic w_load = 0;
  coef_t w_data [C][M];
  logic in_valid = 0, in_relu = 0, in_acc = 0;
  mode_t in_mode = MODE_KAN;
  xq_t in_x [R];
  act_t in_a [R][N];
  logic [AW-1:0] in_addr = '0, rd_addr = '0;
  logic rd_en = 0, rd_valid, busy;
  psum_t rd_data [C];

  kansas_top #(.G(G_HW)) dut (.*);

  always #5 clk = ~clk;

  int    kn [];
  xq_t   xs   [BS][K];
  int    lane [BS][K][N];   // reference B_{k-i}(x)
  int    kidx [BS][K];
  coef_t cs   [K][NOUT][G_L+P];
  coef_t wb   [K][NOUT];
  longint ref_out [BS][NOUT];

  function automatic act_t mlp_in(xq_t x);
    int a;
    a = int'(x) - 128;
    return act_t'(a);
  endfunction

  task automatic load(input coef_t rows [R][C][M]);
    for (int step = 0; step < R; step++) begin
      w_load = 1;
      for (int c = 0; c < C; c++) w_data[c] = rows[R - 1 - step][c];
      @(negedge clk);
    end
    w_load = 0;
  endtask

  task automatic drain();
    in_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  initial begin
    coef_t rows [R][C][M];
    int cyc0, cycles;
    checks = 0; failures = 0; done = 0;
    // ---------------------------------------------------------- data + model
    kn = new[MI+1];
    for (int i = 0; i <= MI; i++) begin
      kn[i] = (i <= NINT) ? (i * 255 + NINT / 2) / NINT : 255;
      cfg_knots[i] = 8'(kn[i]);
    end
    cfg_nint = KW'(NINT);
    for (int f = 0; f < K; f++)
      for (int o = 0; o < NOUT; o++) begin
        for (int j = 0; j < G_L + P; j++) cs[f][o][j] = coef_t'($urandom);
        wb[f][o] = coef_t'($urandom);
      end
    for (int b = 0; b < BS; b++)
      for (int f = 0; f < K; f++) begin
        xs[b][f] = 8'($urandom);
        kidx[b][f] = ref_k(int'(xs[b][f]), kn, NINT);
        for (int i = 0; i < N; i++) begin
          lane[b][f][i] = ref_lane(int'(xs[b][f]), kn, NINT, i);
          if (kidx[b][f] - i < 0 || kidx[b][f] - i >= G_L + P) n_ext++;
        end
      end
    for (int b = 0; b < BS; b++)
      for (int o = 0; o < NOUT; o++) begin
        longint s;
        s = 0;
        for (int f = 0; f < K; f++) begin
          int a;
          for (int i = 0; i < N; i++)
            if (kidx[b][f] - i >= 0 && kidx[b][f] - i < G_L + P)
              s += longint'(lane[b][f][i]) * longint'(cs[f][o][kidx[b][f] - i]);
          a = int'(mlp_in(xs[b][f]));
          if (a > 0) s += longint'(a) * longint'(wb[f][o]);
        end
        ref_out[b][o] = longint'(psum_t'(s));
      end

    for (int r = 0; r < R; r++) begin
      in_x[r] = '0;
      for (int i = 0; i < N; i++) in_a[r][i] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cyc0 = $time / 10;

    for (int ct = 0; ct < CT; ct++) begin
      // spline term: one pass per K-tile
      for (int kt = 0; kt < KT; kt++) begin
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++)
            for (int j = 0; j < M; j++) begin
              int f, o;
              f = kt * R + r; o = ct * C + c;
              rows[r][c][j] = (f < K && o < NOUT && j < G_L + P) ? cs[f][o][j] : coef_t'(0);
            end
        load(rows);
        for (int b = 0; b < BS; b++) begin
          in_valid = 1; in_mode = MODE_KAN; in_relu = 0; in_addr = AW'(b); in_acc = (kt > 0);
          // features beyond K get an input above the grid: all lanes zero
          for (int r = 0; r < R; r++) in_x[r] = (kt * R + r < K) ? xs[b][kt * R + r] : 8'd255;
          @(negedge clk);
        end
        drain();
        passes++;
      end
      // ReLU term: N features per row
      for (int bt = 0; bt < BT; bt++) begin
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++)
            for (int j = 0; j < M; j++) begin
              int f, o;
              f = bt * R * N + r * N + j; o = ct * C + c;
              rows[r][c][j] = (j < N && f < K && o < NOUT) ? wb[f][o] : coef_t'(0);
            end
        load(rows);
        for (int b = 0; b < BS; b++) begin
          in_valid = 1; in_mode = MODE_MLP; in_relu = 1; in_addr = AW'(b); in_acc = 1;
          for (int r = 0; r < R; r++)
            for (int j = 0; j < N; j++) begin
              int f;
              f = bt * R * N + r * N + j;
              in_a[r][j] = (f < K) ? mlp_in(xs[b][f]) : act_t'(0);
            end
          @(negedge clk);
        end
        drain();
      end
      // read back this column tile
      for (int b = 0; b < BS; b++) begin
        rd_en = 1; rd_addr = AW'(b);
        @(negedge clk);
        rd_en = 0;
        for (int c = 0; c < C; c++) if (ct * C + c < NOUT) begin
          checks++;
          if (longint'(rd_data[c]) != ref_out[b][ct * C + c]) begin
            failures++;
            if (failures < 20) $display("FAIL %s out[%0d][%0d] got %0d exp %0d", NAME, b, ct * C + c,
                                        rd_data[c], ref_out[b][ct * C + c]);
          end
        end
      end
    end
    cycles = $time / 10 - cyc0;
    $display("%s: K=%0d NOUT=%0d G=%0d batch=%0d: %0d spline passes (scalar-PE array: %0d), %0d cycles",
             NAME, K, NOUT, G_L, BS, passes, ((K * (G_L + P) + R - 1) / R) * CT, cycles);
    checks++;
    if (passes != KT * CT) failures++;
    checks++;
    if (n_ext == 0) $display("note: no input fell into the grid extension");
    done = 1;
  end
endmodule
