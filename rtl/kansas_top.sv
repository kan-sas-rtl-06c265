// kansas_top: KAN-SAs accelerator core.
//
// A weight-stationary systolic array of R x C N:M processing elements in
// which every row is fed by its own B-spline unit. For a KAN layer the host
// streams quantized inputs x_q (one per row, i.e. one input feature per row,
// one batch element per cycle); each B-spline unit turns its input into the
// N = P + 1 basis values that can be non-zero plus their index k, and the
// PEs multiply them with the matching N of the M = G + P stationary spline
// coefficients. Every column therefore sums, for one output neuron, the
// spline activations phi(x) of R input features. Column results land in an
// accumulator memory where tiles along the input dimension are summed.
// The same array runs plain MLP layers (and the ReLU branch of a KAN layer):
// then each row takes N int8 activations and each PE is an N-wide dot
// product.
//
// Pipeline (input vector presented at cycle t with in_valid):
//   t+1        B-spline units / MLP operand register, mode mux
//   t+1+r      row r enters the array (row skew of r cycles)
//   t+1+r+c    PE (r, c) computes
//   t+1+R+c    column c result is written to the accumulator at in_addr,
//              added to the entry when in_acc was set, else overwriting it
// One vector can be accepted every cycle, and the mode may change from one
// vector to the next; its mode, ReLU flag, address and accumulate flag
// travel with it. Coefficients are loaded by holding w_load for R cycles
// with the vector for the bottom row first (w_data[c] is column c's vector);
// loading is only allowed while no vector is in flight (busy low). Results
// are read back through rd_en / rd_addr, one cycle later on rd_data.
// The knot vector cfg_knots[0 .. cfg_nint] and cfg_nint = G + 2P of the
// running layer are shared by all rows and held stable during a layer.
//
// The B-spline unit, the N:M PE and the array organisation follow the
// paper. The row skew, the control tags, the coefficient shift-in, the MLP
// operand path and the accumulator organisation are this design's own,
// since the paper leaves the memory system and array feeding out of scope.
module kansas_top #(
  parameter int unsigned R         = kansas_pkg::ROWS,
  parameter int unsigned C         = kansas_pkg::COLS,
  parameter int unsigned G         = kansas_pkg::GRID_G,
  parameter int unsigned P         = kansas_pkg::SPLINE_P,
  parameter int unsigned ACC_DEPTH = kansas_pkg::ACC_DEPTH,
  // derived
  parameter int unsigned N       = P + 1,
  parameter int unsigned M       = G + P,
  parameter int unsigned MAX_INT = G + 2 * P,
  parameter int unsigned KW      = $clog2(MAX_INT + 1),
  parameter int unsigned AW      = $clog2(ACC_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // layer configuration
  input  kansas_pkg::xq_t   cfg_knots [MAX_INT+1],
  input  logic [KW-1:0]     cfg_nint,
  // coefficient loading
  input  logic              w_load,
  input  kansas_pkg::coef_t w_data    [C][M],
  // operand stream
  input  logic              in_valid,
  input  kansas_pkg::mode_t in_mode,
  input  logic              in_relu,
  input  kansas_pkg::xq_t   in_x      [R],
  input  kansas_pkg::act_t  in_a      [R][N],
  input  logic [AW-1:0]     in_addr,
  input  logic              in_acc,
  // accumulator read-back
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic              rd_valid,
  output kansas_pkg::psum_t rd_data   [C],
  output logic              busy
);
  import kansas_pkg::*;

  if (P != 3) begin : g_bad_p
    $error("kansas_top: the B-spline table implements cubic splines only (P = 3)");
  end
  if (MAX_INT + 1 != M + N) begin : g_bad_kw
    $error("kansas_top: inconsistent N, M and interval count");
  end

  // ---------------------------------------------------------------- stage 1
  act_t          bs_b    [R][N];
  logic [KW-1:0] bs_k    [R];
  logic          bs_valid[R];
  act_t          mlp_q   [R][N];
  mode_t         mode_q;
  logic          relu_q;

  for (genvar r = 0; r < R; r++) begin : g_bsu
    bspline_unit #(.MAX_INT(MAX_INT), .KW(KW)) u_bsu (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .x_q      (in_x[r]),
      .knots    (cfg_knots),
      .nint     (cfg_nint),
      .out_valid(bs_valid[r]),
      .out_b    (bs_b[r]),
      .out_k    (bs_k[r])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q <= MODE_KAN;
      relu_q <= 1'b0;
      for (int r = 0; r < int'(R); r++)
        for (int i = 0; i < int'(N); i++) mlp_q[r][i] <= '0;
    end else begin
      mode_q <= in_mode;
      relu_q <= in_relu;
      mlp_q  <= in_a;
    end
  end

  // ------------------------------------------------------- mode mux + skew
  act_t          sel_b  [R][N];
  logic [KW-1:0] sel_k  [R];
  act_t          a_left [R][N];
  logic [KW-1:0] k_left [R];

  for (genvar r = 0; r < R; r++) begin : g_row
    logic [N*DATA_W+KW-1:0] packed_d, packed_q;

    row_input_sel #(.N(N), .KW(KW)) u_sel (
      .mode   (mode_q),
      .relu_en(relu_q),
      .kan_b  (bs_b[r]),
      .kan_k  (bs_k[r]),
      .mlp_a  (mlp_q[r]),
      .lanes  (sel_b[r]),
      .k      (sel_k[r])
    );

    always_comb begin
      packed_d[KW-1:0] = sel_k[r];
      for (int i = 0; i < int'(N); i++)
        packed_d[KW+i*DATA_W +: DATA_W] = sel_b[r][i];
    end

    delay_line #(.WIDTH(N*DATA_W+KW), .DEPTH(r)) u_skew (
      .clk(clk), .rst_n(rst_n), .d(packed_d), .q(packed_q));

    always_comb begin
      k_left[r] = packed_q[KW-1:0];
      for (int i = 0; i < int'(N); i++)
        a_left[r][i] = act_t'(packed_q[KW+i*DATA_W +: DATA_W]);
    end
  end

  // ------------------------------------------------------------------ array
  psum_t psum_bottom [C];

  systolic_array #(.R(R), .C(C), .N(N), .M(M), .KW(KW)) u_array (
    .clk        (clk),
    .rst_n      (rst_n),
    .w_load     (w_load),
    .w_top      (w_data),
    .a_left     (a_left),
    .k_left     (k_left),
    .psum_bottom(psum_bottom)
  );

  // ------------------------------------------------------ control tag pipe
  typedef struct packed {
    logic          valid;
    logic          acc;
    logic [AW-1:0] addr;
  } tag_t;

  localparam int unsigned TAGS = R + C;   // tag_sr[j] belongs to cycle t+1+j
  tag_t tag_sr [TAGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < int'(TAGS); j++) tag_sr[j] <= '0;
    end else begin
      tag_sr[0] <= '{valid: in_valid, acc: in_acc, addr: in_addr};
      for (int j = 1; j < int'(TAGS); j++) tag_sr[j] <= tag_sr[j-1];
    end
  end

  always_comb begin
    busy = 1'b0;
    for (int j = 0; j < int'(TAGS); j++) busy |= tag_sr[j].valid;
  end

  // ------------------------------------------------------------ accumulator
  logic          wr_en   [C];
  logic          wr_acc  [C];
  logic [AW-1:0] wr_addr [C];

  for (genvar c = 0; c < C; c++) begin : g_wr
    assign wr_en[c]   = tag_sr[R+c].valid;
    assign wr_acc[c]  = tag_sr[R+c].acc;
    assign wr_addr[c] = tag_sr[R+c].addr;
  end

  acc_mem #(.C(C), .DEPTH(ACC_DEPTH), .AW(AW)) u_acc (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (wr_en),
    .wr_acc  (wr_acc),
    .wr_addr (wr_addr),
    .wr_data (psum_bottom),
    .rd_en   (rd_en),
    .rd_addr (rd_addr),
    .rd_valid(rd_valid),
    .rd_data (rd_data)
  );

  // Coefficients may only move while nothing is in flight.
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n)
    w_load |-> !busy && !in_valid)
    else $error("kansas_top: w_load while operands are in flight");

  // The B-spline units' valid flags run in step with the control tags.
  for (genvar r = 0; r < R; r++) begin : g_chk
    a_bsu_step: assert property (@(posedge clk) disable iff (!rst_n)
      bs_valid[r] == tag_sr[0].valid)
      else $error("kansas_top: B-spline unit %0d out of step", r);
  end

endmodule
