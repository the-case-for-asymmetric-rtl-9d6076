// asym_sa_top: weight-stationary systolic-array accelerator.
//
// An R x C array of processing elements computes O = A x W for one R x C
// weight tile W at a time. The weight tile comes from the weight buffer on
// the north edge and is preloaded into the array (R cycles). Input vectors
// (rows of A, R elements each) come from the input buffer on the west edge,
// one per cycle, staggered so that row r receives its element r cycles late.
// Partial sums flow down the columns; the column results are de-staggered,
// pass through the per-column accumulators and are written, one C-element
// result vector per cycle, into the output buffer on the south edge. With
// the defaults (32 x 32, 16-bit operands, 37-bit sums) this is the evaluated
// configuration; the paper's point, a PE floorplan 3.8 times wider than
// high, is a layout choice and leaves this RTL unchanged.
//
// Host side: ib_wr_* writes one input vector (R x BH bits) per cycle, wb_wr_*
// one weight-tile row (C x BH bits) per cycle, ob_rd_* reads one result
// vector (C x BV bits) with one cycle latency. An operation is started with
// cmd_valid while cmd_ready is high; done pulses once its last result is in
// the output buffer. Latency: R cycles preload, then the result of the input
// vector read in stream cycle n is written R+C+1 cycles later; an operation
// of N vectors takes R + N + R + C + 2 cycles from command to done.
//
// The block arrangement is the paper's; buffer sizes, host ports and the
// command interface are this design's choices.
module asym_sa_top #(
  parameter int unsigned R       = sa_pkg::SA_ROWS,
  parameter int unsigned C       = sa_pkg::SA_COLS,
  parameter int unsigned BH      = sa_pkg::SA_BH,
  parameter int unsigned BV      = sa_pkg::SA_BV,
  parameter int unsigned A_DEPTH = sa_pkg::SA_A_DEPTH,
  parameter int unsigned W_DEPTH = sa_pkg::SA_W_DEPTH,
  localparam int unsigned AW_A   = $clog2(A_DEPTH),
  localparam int unsigned AW_W   = $clog2(W_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // input buffer (west) host write port
  input  logic                  ib_wr_en,
  input  logic [AW_A-1:0]       ib_wr_addr,
  input  logic [R-1:0][BH-1:0]  ib_wr_data,
  // weight buffer (north) host write port
  input  logic                  wb_wr_en,
  input  logic [AW_W-1:0]       wb_wr_addr,
  input  logic [C-1:0][BH-1:0]  wb_wr_data,
  // output buffer (south) host read port
  input  logic                  ob_rd_en,
  input  logic [AW_A-1:0]       ob_rd_addr,
  output logic [C-1:0][BV-1:0]  ob_rd_data,
  // command
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  logic [AW_W-1:0]       cmd_w_base,
  input  logic [AW_A-1:0]       cmd_a_base,
  input  logic [AW_A-1:0]       cmd_o_base,
  input  logic [AW_A:0]         cmd_n_vec,
  input  logic                  cmd_accumulate,
  output logic                  busy,
  output logic                  done
);

  logic                 wb_rd_en, w_shift, ib_rd_en;
  logic [AW_W-1:0]      wb_rd_addr;
  logic [AW_A-1:0]      ib_rd_addr, ob_wr_addr;
  logic                 acc_en, acc_first, ob_wr_en;
  logic [C-1:0]         acc_q_valid;

  logic [C-1:0][BH-1:0] w_north;
  logic [R-1:0][BH-1:0] a_vec, a_west;
  logic [C-1:0][BV-1:0] psum_south, psum_aligned, acc_q;

  sa_controller #(.R(R), .C(C), .AW_A(AW_A), .AW_W(AW_W)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_w_base, .cmd_a_base, .cmd_o_base,
    .cmd_n_vec, .cmd_accumulate,
    .wb_rd_en, .wb_rd_addr, .w_shift,
    .ib_rd_en, .ib_rd_addr,
    .acc_en, .acc_first,
    .res_valid (acc_q_valid[0]),
    .ob_wr_en, .ob_wr_addr,
    .busy, .done
  );

  weight_buffer #(.LANES(C), .W(BH), .DEPTH(W_DEPTH)) u_wbuf (
    .clk,
    .wr_en (wb_wr_en), .wr_addr (wb_wr_addr), .wr_data (wb_wr_data),
    .rd_en (wb_rd_en), .rd_addr (wb_rd_addr), .rd_data (w_north)
  );

  input_buffer #(.LANES(R), .W(BH), .DEPTH(A_DEPTH)) u_ibuf (
    .clk,
    .wr_en (ib_wr_en), .wr_addr (ib_wr_addr), .wr_data (ib_wr_data),
    .rd_en (ib_rd_en), .rd_addr (ib_rd_addr), .rd_data (a_vec)
  );

  skew_buffer #(.N(R), .W(BH), .REVERSE(1'b0)) u_skew_in (
    .clk, .rst_n, .d (a_vec), .q (a_west)
  );

  systolic_array #(.R(R), .C(C), .BH(BH), .BV(BV)) u_array (
    .clk, .rst_n, .w_shift, .w_north, .a_west, .psum_south
  );

  skew_buffer #(.N(C), .W(BV), .REVERSE(1'b1)) u_deskew_out (
    .clk, .rst_n, .d (psum_south), .q (psum_aligned)
  );

  for (genvar c = 0; c < C; c++) begin : g_acc
    col_accumulator #(.BV(BV)) u_acc (
      .clk, .rst_n,
      .en      (acc_en),
      .first   (acc_first),
      .d       (psum_aligned[c]),
      .q       (acc_q[c]),
      .q_valid (acc_q_valid[c])
    );
  end

  output_buffer #(.LANES(C), .W(BV), .DEPTH(A_DEPTH)) u_obuf (
    .clk,
    .wr_en (ob_wr_en), .wr_addr (ob_wr_addr), .wr_data (acc_q),
    .rd_en (ob_rd_en), .rd_addr (ob_rd_addr), .rd_data (ob_rd_data)
  );

  // All column accumulators are driven by the same control.
  a_acc_lockstep : assert property (@(posedge clk) disable iff (!rst_n)
      acc_q_valid == '0 || acc_q_valid == '1);

endmodule
