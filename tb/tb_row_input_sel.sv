// tb_row_input_sel: random operands in both modes, with and without ReLU.
// KAN mode must pass the B-spline lanes and k; MLP mode must give lane i =
// relu?(a_{N-1-i}) and k = N-1.
module tb_row_input_sel;
  import kansas_pkg::*;

  localparam int unsigned N = kansas_pkg::NNZ;
  int checks = 0, failures = 0, n_relu = 0;
  mode_t mode;
  logic relu_en;
  act_t kan_b [N], mlp_a [N], lanes [N];
  logic [3:0] kan_k, k;

  row_input_sel dut (.*);

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
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      mode    = mode_t'($urandom_range(0, 1));
      relu_en = 1'($urandom);
      kan_k   = 4'($urandom_range(0, 11));
      for (int i = 0; i < int'(N); i++) begin
        kan_b[i] = act_t'($urandom_range(0, 127));
        mlp_a[i] = act_t'($urandom);
      end
      #1;
      if (mode == MODE_KAN) begin
        check("k", int'(k), int'(kan_k));
        for (int i = 0; i < int'(N); i++) check("kan lane", int'(lanes[i]), int'(kan_b[i]));
      end else begin
        check("k", int'(k), int'(N) - 1);
        for (int i = 0; i < int'(N); i++) begin
          int a;
          a = int'(mlp_a[int'(N) - 1 - i]);
          if (relu_en && a < 0) begin
            a = 0;
            n_relu++;
          end
          check("mlp lane", int'(lanes[i]), a);
        end
      end
    end
    checks++;
    if (n_relu == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
