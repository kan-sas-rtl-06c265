// tb_wl_prefetcher: the second layer [64, 128] of the KAN prefetcher model
// (G = 4, P = 3) for a batch of 8, on the default core.
module tb_wl_prefetcher;
  int checks, failures;
  bit done;

  kan_layer_check #(.G_HW(5), .G_L(4), .K(64), .NOUT(128), .BS(8), .NAME("Prefetcher [64,128]")) u_run (.checks(checks), .failures(failures), .done(done));

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
