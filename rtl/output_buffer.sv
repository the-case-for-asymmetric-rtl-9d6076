// output_buffer: banked local memory on the south edge of the array.
//
// One bank per array column (LANES banks of DEPTH words of W bits) collects
// the column results. The array side writes one result vector, one word per
// bank, at wr_addr; the host reads a whole vector at rd_addr and gets it on
// rd_data one cycle later, held until the next read. That results are
// collected in a buffer on the south edge follows the paper; depth and ports
// are this design's choices.
module output_buffer #(
  parameter int unsigned LANES = sa_pkg::SA_COLS,
  parameter int unsigned W     = sa_pkg::SA_BV,
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
    sram_bank #(.W(W), .DEPTH(DEPTH), .ZERO_IDLE(1'b0)) u_bank (
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
