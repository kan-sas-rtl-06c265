// acc_mem: accumulator memory at the bottom of the systolic array.
//
// One bank of DEPTH int32 entries per array column. A column result arrives
// with its own write enable, entry address and accumulate flag (columns
// finish one cycle apart in a skewed array). With wr_acc set the result is
// added to the entry (read-modify-write in the same cycle), which sums the
// partial results of successive tiles along the reduction dimension; with
// wr_acc clear the entry is overwritten, which starts a new sum. The read
// port returns the same entry of all columns one cycle after rd_en.
//
// The paper only names this memory as the destination of the partial sums;
// its organisation, depth and ports are this design's choices. Entries are
// not reset: the first write of a sum must have wr_acc clear.
module acc_mem #(
  parameter int unsigned C     = kansas_pkg::COLS,
  parameter int unsigned DEPTH = kansas_pkg::ACC_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en   [C],
  input  logic              wr_acc  [C],
  input  logic [AW-1:0]     wr_addr [C],
  input  kansas_pkg::psum_t wr_data [C],
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic              rd_valid,
  output kansas_pkg::psum_t rd_data [C]
);
  import kansas_pkg::*;

  psum_t mem [C][DEPTH];

  for (genvar c = 0; c < C; c++) begin : g_bank
    always_ff @(posedge clk) begin
      if (wr_en[c]) begin
        mem[c][wr_addr[c]] <= (wr_acc[c] ? mem[c][wr_addr[c]] : psum_t'(0)) + wr_data[c];
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     rd_data[c] <= '0;
      else if (rd_en) rd_data[c] <= mem[c][rd_addr];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end
endmodule
