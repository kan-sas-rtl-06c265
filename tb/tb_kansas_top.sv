// tb_kansas_top: end-to-end test of the accelerator core at its default
// size (16 x 16 array of 4:8 PEs, G = 5, P = 3, 256-entry accumulator).
//
// It computes a KAN layer with 32 input features and 16 outputs for a batch
// of 40 inputs as two K-tiles of 16 features (the second accumulating onto
// the first), adds the ReLU branch of the layer as an MLP pass accumulated on
// top, and runs a further tile in which KAN and MLP vectors alternate at
// random with a knot vector offset from the uniform grid. All results are
// read back and compared with a reference built from the Cox-de Boor
// recursion. It also checks that one vector is accepted per cycle, that
// column c writes its result exactly 1 + R + c cycles after the vector
// entered, and that every mechanism of the design occurred: KAN and MLP
// vectors, mode switches, ReLU, accumulate and overwrite writes, B-spline
// lanes zeroed in the grid extension, both clips of the align stage, and
// coefficient loads.
module tb_kansas_top;
  import kansas_pkg::*;
  import kan_ref_pkg::*;

  localparam int R = kansas_pkg::ROWS, C = kansas_pkg::COLS;
  localparam int N = kansas_pkg::NNZ, M = kansas_pkg::NBASIS;
  localparam int MI = kansas_pkg::MAX_INT, AW = $clog2(kansas_pkg::ACC_DEPTH);
  localparam int BS = 40;

  int checks = 0, failures = 0;
  int n_kan = 0, n_mlp = 0, n_switch = 0, n_relu = 0, n_accw = 0, n_ovw = 0;
  int n_ext = 0, n_clip_lo = 0, n_clip_hi = 0, n_load = 0;

  logic clk = 0, rst_n = 0;
  xq_t cfg_knots [MI+1];
  logic [3:0] cfg_nint;
  logic w_load;
  coef_t w_data [C][M];
  logic in_valid, in_relu, in_acc;
  mode_t in_mode;
  xq_t in_x [R];
  act_t in_a [R][N];
  logic [AW-1:0] in_addr, rd_addr;
  logic rd_en, rd_valid, busy;
  psum_t rd_data [C];

  kansas_top dut (.*);

  always #5 clk = ~clk;

  int kn [];
  coef_t cw [R][C][M];
  longint acc_ref [1 << AW][C];
  bit     written [1 << AW];
  int cyc = 0;
  bit last_mode_valid = 0;
  mode_t last_mode;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // write-timing monitor: first write of each column after the first vector
  int first_in = -1;
  int first_wr [C];
  int n_wr [C];
  initial for (int c = 0; c < C; c++) begin first_wr[c] = -1; n_wr[c] = 0; end
  always @(posedge clk) if (rst_n) begin
    if (in_valid && first_in < 0) first_in = cyc;
    for (int c = 0; c < C; c++) if (dut.wr_en[c]) begin
      n_wr[c]++;
      if (first_wr[c] < 0) first_wr[c] = cyc;
    end
  end

  task automatic set_knots(int offset);
    kn = new[MI+1];
    for (int i = 0; i <= MI; i++) begin
      kn[i] = (i * 255 + MI / 2) / MI;
      if (i > 0 && i < MI) kn[i] += offset;
      cfg_knots[i] = 8'(kn[i]);
    end
    cfg_nint = 4'(MI);
  endtask

  task automatic load_coefs();
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        for (int m = 0; m < M; m++) cw[r][c][m] = coef_t'($urandom);
    for (int step = 0; step < R; step++) begin
      w_load = 1;
      for (int c = 0; c < C; c++) w_data[c] = cw[R - 1 - step][c];
      @(negedge clk);
    end
    w_load = 0;
    n_load++;
  endtask

  function automatic int pick_x();
    int s;
    s = $urandom_range(0, 5);
    if (s == 0) return kn[$urandom_range(0, MI)];
    if (s == 1) return (kn[$urandom_range(1, MI)] - 1);
    return $urandom_range(0, 255);
  endfunction

  // present one vector during this cycle and update the reference
  task automatic send(mode_t mode, bit relu, int addr, bit acc);
    longint contrib [C];
    for (int c = 0; c < C; c++) contrib[c] = 0;
    in_valid = 1; in_mode = mode; in_relu = relu; in_addr = AW'(addr); in_acc = acc;
    for (int r = 0; r < R; r++) begin
      int x, k, raw;
      x = pick_x();
      in_x[r] = 8'(x);
      for (int i = 0; i < N; i++) in_a[r][i] = act_t'($urandom);
      if (mode == MODE_KAN) begin
        k = ref_k(x, kn, MI);
        raw = MI * (x - kn[0]) - 255 * k;
        if (raw < 0) n_clip_lo++;
        if (raw > 255) n_clip_hi++;
        for (int i = 0; i < N; i++) begin
          int b;
          b = ref_lane(x, kn, MI, i);
          if (k < MI && (k - i < 0 || k - i >= MI - 3)) n_ext++;
          if (k - i >= 0 && k - i < M)
            for (int c = 0; c < C; c++) contrib[c] += longint'(b) * longint'(cw[r][c][k - i]);
        end
      end else begin
        for (int j = 0; j < N; j++) begin
          int a;
          a = int'(in_a[r][j]);
          if (relu && a < 0) begin a = 0; n_relu++; end
          for (int c = 0; c < C; c++) contrib[c] += longint'(a) * longint'(cw[r][c][j]);
        end
      end
    end
    if (mode == MODE_KAN) n_kan++; else n_mlp++;
    if (last_mode_valid && last_mode != mode) n_switch++;
    last_mode = mode; last_mode_valid = 1;
    if (acc) n_accw++; else n_ovw++;
    for (int c = 0; c < C; c++)
      acc_ref[addr][c] = longint'(psum_t'((acc ? acc_ref[addr][c] : 0) + contrib[c]));
    written[addr] = 1;
    @(negedge clk);
  endtask

  task automatic idle_until_drained();
    in_valid = 0;
    last_mode_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  initial begin
    int t_start;
    w_load = 0; in_valid = 0; in_mode = MODE_KAN; in_relu = 0; in_acc = 0; in_addr = 0;
    rd_en = 0; rd_addr = 0;
    for (int r = 0; r < R; r++) begin
      in_x[r] = 0;
      for (int i = 0; i < N; i++) in_a[r][i] = 0;
    end
    for (int c = 0; c < C; c++) for (int m = 0; m < M; m++) w_data[c][m] = 0;
    set_knots(0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // K-tile 0 of the spline term: overwrite
    load_coefs();
    t_start = cyc;
    for (int v = 0; v < BS; v++) send(MODE_KAN, 0, v, 0);
    idle_until_drained();
    // the batch streamed at one vector per cycle; each column wrote BS times
    for (int c = 0; c < C; c++) begin
      check($sformatf("first write col %0d", c), first_wr[c] - first_in, 1 + R + c);
      check($sformatf("writes col %0d", c), n_wr[c], BS);
    end
    // K-tile 1: accumulate
    load_coefs();
    for (int v = 0; v < BS; v++) send(MODE_KAN, 0, v, 1);
    idle_until_drained();
    // ReLU branch w_b * relu(x) of the same outputs, accumulated
    load_coefs();
    for (int v = 0; v < BS; v++) send(MODE_MLP, 1, v, 1);
    idle_until_drained();
    // mixed modes, knots off the uniform grid
    set_knots(2);
    load_coefs();
    for (int v = 0; v < BS; v++) send(mode_t'($urandom_range(0, 1)), 1'($urandom), 64 + v, 0);
    idle_until_drained();

    // read back
    for (int a = 0; a < (1 << AW); a++) if (written[a]) begin
      rd_en = 1; rd_addr = AW'(a);
      @(negedge clk);
      rd_en = 0;
      check("rd_valid", longint'(rd_valid), 1);
      for (int c = 0; c < C; c++)
        check($sformatf("out[%0d][%0d]", a, c), longint'(rd_data[c]), acc_ref[a][c]);
    end

    $display("mechanisms: kan=%0d mlp=%0d switch=%0d relu=%0d acc=%0d overwrite=%0d ext_zero=%0d clip_lo=%0d clip_hi=%0d loads=%0d",
             n_kan, n_mlp, n_switch, n_relu, n_accw, n_ovw, n_ext, n_clip_lo, n_clip_hi, n_load);
    checks++; if (n_kan == 0) failures++;
    checks++; if (n_mlp == 0) failures++;
    checks++; if (n_switch == 0) failures++;
    checks++; if (n_relu == 0) failures++;
    checks++; if (n_accw == 0) failures++;
    checks++; if (n_ovw == 0) failures++;
    checks++; if (n_ext == 0) failures++;
    checks++; if (n_clip_lo == 0) failures++;
    checks++; if (n_clip_hi == 0) failures++;
    checks++; if (n_load == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
