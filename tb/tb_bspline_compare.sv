// tb_bspline_compare: random sorted knot vectors, interval counts and inputs
// (including inputs equal to a knot); k is compared with a top-down search.
module tb_bspline_compare;
  import kansas_pkg::*;
  import kan_ref_pkg::*;

  localparam int unsigned MI = kansas_pkg::MAX_INT;
  int checks = 0, failures = 0;
  xq_t x_q;
  xq_t knots [MI+1];
  logic [3:0] nint, k;
  int kn [];

  bspline_compare dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    kn = new[MI+1];
    for (int trial = 0; trial < 3000; trial++) begin
      int v;
      v = $urandom_range(0, 20);
      for (int i = 0; i <= int'(MI); i++) begin
        kn[i] = v;
        knots[i] = 8'(v);
        v = v + $urandom_range(1, 22);
        if (v > 255) v = 255;
      end
      nint = 4'($urandom_range(7, MI));
      if (trial % 3 == 0) x_q = knots[$urandom_range(0, MI)];
      else                x_q = 8'($urandom);
      #1;
      checks++;
      if (int'(k) != ref_k(int'(x_q), kn, int'(nint))) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d nint=%0d k=%0d exp=%0d", x_q, nint, k,
                                    ref_k(int'(x_q), kn, int'(nint)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
