// tb_wl_catch22: the Catch22-KAN classifier layer [22, 60] (G = 3, P = 3; 60
// is the upper bound on the number of classes) for a batch of 8, on the
// default core.
module tb_wl_catch22;
  int checks, failures;
  bit done;

  kan_layer_check #(.G_HW(5), .G_L(3), .K(22), .NOUT(60), .BS(8), .NAME("Catch22-KAN [22,60]")) u_run (.checks(checks), .failures(failures), .done(done));

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
