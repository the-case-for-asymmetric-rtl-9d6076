// input_buffer: banked local memory on the west edge of the array.
//
// It holds the input matrix, stored transposed: bank r holds the elements
// that enter array row r, and one address holds one input vector. There is
// one bank per array row
// (LANES banks of DEPTH words of W bits). The host writes a whole vector, one
// word per bank, at wr_addr; the array side reads all banks at the same
// rd_addr and gets the vector on rd_data one cycle later. In cycles that
// follow no read, rd_data is zero, so idle cycles feed zeros into the array.
// That the buffer sits on the west edge and is banked follows the paper; the
// depth, the port arrangement and the zero-when-idle output are this
// design's choices.
module input_buffer #(
  parameter int unsigned LANES = sa_pkg::SA_ROWS,
  parameter int unsigned W     = sa_pkg::SA_BH,
  parameter int unsigned DEPTH = sa_pkg::SA_A_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [AW-1:0]           wr_addr,
  input  logic [LANES-1:0][W-1:0] wr_data,
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_addr,
  output logic [LANES-1:0][W-1:0] rd_data
);

  for (genvar l = 0; l < LANES; l++) begin : g_bank
    sram_bank #(.W(W), .DEPTH(DEPTH), .ZERO_IDLE(1'b1)) u_bank (
      .clk   (clk),
      .we    (wr_en),
      .waddr (wr_addr),
      .wdata (wr_data[l]),
      .re    (rd_en),
      .raddr (rd_addr),
      .rdata (rd_data[l])
    );
  end

endmodule
