// tb_wl_stardust: the first layer [168, 40] of 5G-STARDUST (G = 5, P = 3)
// for a batch of 8, on the default core.
module tb_wl_stardust;
  int checks, failures;
  bit done;

  kan_layer_check #(.G_HW(5), .G_L(5), .K(168), .NOUT(40), .BS(8), .NAME("5G-STARDUST [168,40]")) u_run (.checks(checks), .failures(failures), .done(done));

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
