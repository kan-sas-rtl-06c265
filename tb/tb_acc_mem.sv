// tb_acc_mem: random writes (accumulate or overwrite, a different address
// per column) and reads against a model of the memory; reads return data one
// cycle after rd_en.
module tb_acc_mem;
  import kansas_pkg::*;

  localparam int unsigned C = 3, DEPTH = 16, AW = 4;
  int checks = 0, failures = 0, n_acc = 0, n_ovw = 0;
  logic clk = 0, rst_n = 0;
  logic wr_en [C], wr_acc [C];
  logic [AW-1:0] wr_addr [C];
  psum_t wr_data [C];
  logic rd_en, rd_valid;
  logic [AW-1:0] rd_addr;
  psum_t rd_data [C];
  psum_t model [C][DEPTH];
  bit    init  [C][DEPTH];

  acc_mem #(.C(C), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < int'(C); c++) begin
      wr_en[c] = 0; wr_acc[c] = 0; wr_addr[c] = 0; wr_data[c] = 0;
      for (int a = 0; a < int'(DEPTH); a++) init[c][a] = 0;
    end
    rd_en = 0; rd_addr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int ra;
      psum_t exp_rd [C];
      bit    exp_ok [C];
      for (int c = 0; c < int'(C); c++) begin
        wr_en[c]   = 1'($urandom);
        wr_addr[c] = AW'($urandom);
        wr_acc[c]  = init[c][wr_addr[c]] ? 1'($urandom) : 1'b0;
        wr_data[c] = psum_t'($urandom);
      end
      ra = $urandom_range(0, DEPTH - 1);
      rd_en = 1'($urandom);
      rd_addr = AW'(ra);
      // the read sees the memory before this edge's writes
      for (int c = 0; c < int'(C); c++) begin
        exp_rd[c] = model[c][ra];
        exp_ok[c] = init[c][ra];
      end
      for (int c = 0; c < int'(C); c++) if (wr_en[c]) begin
        if (wr_acc[c]) begin
          model[c][wr_addr[c]] += wr_data[c];
          n_acc++;
        end else begin
          model[c][wr_addr[c]] = wr_data[c];
          n_ovw++;
        end
        init[c][wr_addr[c]] = 1;
      end
      @(negedge clk);
      checks++;
      if (rd_valid != rd_en) failures++;
      if (rd_en) for (int c = 0; c < int'(C); c++) if (exp_ok[c]) begin
        checks++;
        if (rd_data[c] != exp_rd[c]) begin
          failures++;
          if (failures < 20) $display("FAIL col %0d addr %0d got %0d exp %0d", c, ra, rd_data[c], exp_rd[c]);
        end
      end
    end
    checks++;
    if (n_acc == 0 || n_ovw == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
