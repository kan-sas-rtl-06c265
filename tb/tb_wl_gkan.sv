// tb_wl_gkan: the first layer [200, 16] of GKAN in its cubic variant
// (G = 3, P = 3) for a batch of 8, on the default core.
module tb_wl_gkan;
  int checks, failures;
  bit done;

  kan_layer_check #(.G_HW(5), .G_L(3), .K(200), .NOUT(16), .BS(8), .NAME("GKAN [200,16]")) u_run (.checks(checks), .failures(failures), .done(done));

  initial begin
    #200_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
