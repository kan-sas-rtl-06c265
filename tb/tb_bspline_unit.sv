// tb_bspline_unit: streams one input per cycle through the B-spline unit for
// grids G = 1..5 (uniform knots rounded to integer codes) and checks
//   - k and all four lanes bit-exactly against the reference model,
//   - lanes against the true continuous B-spline values (within 6 codes),
//   - partition of unity inside the input domain (sum = 190.5 +- 2),
//   - the latency of one cycle and the rate of one input per cycle,
//   - that inputs in the grid extension really produced zeroed lanes.
module tb_bspline_unit;
  import kansas_pkg::*;
  import kan_ref_pkg::*;

  localparam int unsigned MI = kansas_pkg::MAX_INT;
  int checks = 0, failures = 0, n_ext = 0, n_dom = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  xq_t x_q;
  xq_t knots [MI+1];
  logic [3:0] nint, out_k;
  act_t out_b [4];
  int kn [];

  bspline_unit dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Sampled at the rising edge, before the edge's updates: out_* then hold
  // the result registered at the previous edge, which must belong to the
  // input accepted at that previous edge (latency 1, one input per cycle).
  logic prev_valid = 0;
  int   prev_x = 0;
  always @(posedge clk) if (rst_n) begin
    if (prev_valid != out_valid) begin
      failures++;
      $display("FAIL latency: out_valid=%0d, input one cycle earlier=%0d", out_valid, prev_valid);
    end
    if (out_valid && prev_valid) begin
      int x, k, sum;
      real u;
      x = prev_x;
      k = ref_k(x, kn, int'(nint));
      check("k", int'(out_k), k);
      sum = 0;
      for (int i = 0; i < 4; i++) begin
        check($sformatf("lane%0d x=%0d", i, x), int'(out_b[i]), ref_lane(x, kn, int'(nint), i));
        sum += int'(out_b[i]);
      end
      // continuous check: B_{k-i}(x) on the exact uniform grid
      u = real'(int'(nint)) * real'(x - kn[0]) / 255.0;
      for (int i = 0; i < 4; i++) begin
        int idx, e;
        idx = k - i;
        e = (idx < 0 || idx >= int'(nint) - 3) ? 0 : quant(b03(u - real'(idx)));
        checks++;
        if (int'(out_b[i]) - e > 6 || e - int'(out_b[i]) > 6) begin
          failures++;
          if (failures < 20) $display("FAIL continuous lane%0d x=%0d got %0d exp %0d", i, x, out_b[i], e);
        end
      end
      if (k >= 3 && k < int'(nint) - 3) begin
        n_dom++;
        checks++;
        if (sum < 189 || sum > 192) begin
          failures++;
          $display("FAIL partition of unity x=%0d sum=%0d", x, sum);
        end
      end else if (k < int'(nint)) n_ext++;
    end
    prev_valid = in_valid;
    prev_x     = int'(x_q);
  end

  initial begin
    kn = new[MI+1];
    in_valid = 0; x_q = 0; nint = 4'(MI);
    for (int i = 0; i <= int'(MI); i++) knots[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 1; g <= 5; g++) begin
      @(negedge clk);
      in_valid = 0;
      nint = 4'(g + 6);
      for (int i = 0; i <= int'(MI); i++) begin
        kn[i] = (i <= g + 6) ? (i * 255 + (g + 6) / 2) / (g + 6) : 255;
        knots[i] = 8'(kn[i]);
      end
      @(negedge clk);
      for (int n = 0; n < 600; n++) begin
        in_valid = 1;
        x_q = (n < 256) ? 8'(n) : 8'($urandom);
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      @(negedge clk);
    end
    checks++;
    if (n_ext == 0 || n_dom == 0) failures++;
    $display("inputs in domain %0d, in grid extension %0d", n_dom, n_ext);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
