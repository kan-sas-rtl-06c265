// tb_bspline_lut: checks every row of the half-cubic table against the
// Cox-de Boor reference (both ports, direct and inverted addressing) and
// the end rows (0, 32) and (32, 127) of the paper's example.
module tb_bspline_lut;
  import kan_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [7:0] addr_a, addr_b, lo_a, hi_a, lo_b, hi_b;

  bspline_lut dut (.*);

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 256; a++) begin
      addr_a = 8'(a);
      addr_b = 8'(255 - a);
      #1;
      check($sformatf("lo_a[%0d]", a), int'(lo_a), ref_lane_raw(a, 0));
      check($sformatf("hi_a[%0d]", a), int'(hi_a), ref_lane_raw(a, 1));
      // inverted address holds B(1 - x_a) and B(2 - x_a) = lanes 3 and 2
      check($sformatf("lo_b[%0d]", a), int'(lo_b), ref_lane_raw(a, 3));
      check($sformatf("hi_b[%0d]", a), int'(hi_b), ref_lane_raw(a, 2));
    end
    addr_a = 8'd0; addr_b = 8'd255; #1;
    check("row0.lo", int'(lo_a), 0);
    check("row0.hi", int'(hi_a), 32);
    check("row255.lo", int'(lo_b), 32);
    check("row255.hi", int'(hi_b), 127);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
