// tb_bspline_align: random inputs, first knots, interval counts and
// interval indices; x_addr is compared with the clipped address formula.
// Counts that both clip limits were exercised.
module tb_bspline_align;
  import kansas_pkg::*;
  import kan_ref_pkg::*;

  int checks = 0, failures = 0, n_low = 0, n_high = 0, n_mid = 0;
  xq_t x_q, t0;
  logic [3:0] nint, k;
  logic [7:0] x_addr;

  bspline_align dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 5000; trial++) begin
      int raw, e;
      x_q  = 8'($urandom);
      t0   = 8'($urandom_range(0, 40));
      nint = 4'($urandom_range(7, 11));
      k    = 4'($urandom_range(0, int'(nint)));
      #1;
      e   = ref_addr(int'(x_q), int'(t0), int'(nint), int'(k));
      raw = int'(nint) * (int'(x_q) - int'(t0)) - 255 * int'(k);
      if (raw < 0) n_low++; else if (raw > 255) n_high++; else n_mid++;
      checks++;
      if (int'(x_addr) != e) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d t0=%0d nint=%0d k=%0d addr=%0d exp=%0d",
                                    x_q, t0, nint, k, x_addr, e);
      end
    end
    checks += 3;
    if (n_low == 0 || n_high == 0 || n_mid == 0) failures++;
    $display("clip low %0d, clip high %0d, in range %0d", n_low, n_high, n_mid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
