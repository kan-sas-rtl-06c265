// tb_wl_mnist: the first layer [784, 64] of MNIST-KAN (G = 10, P = 3) for a
// batch of 4, on a core built with G = 10 (4:13 PEs), since its 13 basis
// functions do not fit the default 4:8 PE.
module tb_wl_mnist;
  int checks, failures;
  bit done;

  kan_layer_check #(.G_HW(10), .G_L(10), .K(784), .NOUT(64), .BS(4), .NAME("MNIST-KAN [784,64]")) u_run (.checks(checks), .failures(failures), .done(done));

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
