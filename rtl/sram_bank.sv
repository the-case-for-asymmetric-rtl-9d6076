// sram_bank: one memory bank, one write port and one read port.
//
// A write stores wdata at waddr at the clock edge. A read returns the word at
// raddr one cycle later on rdata (read-before-write if both hit the same
// address). With ZERO_IDLE = 1, rdata is cleared in cycles that follow no
// read, so a consumer that reads continuously sees zeros between bursts; with
// ZERO_IDLE = 0 it keeps the last word read. The array is written so that
// synthesis can map it to a memory macro; its contents are not reset.
module sram_bank #(
  parameter int unsigned W         = sa_pkg::SA_BH,
  parameter int unsigned DEPTH     = sa_pkg::SA_A_DEPTH,
  parameter bit          ZERO_IDLE = 1'b1,
  localparam int unsigned AW       = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re)             rdata <= mem[raddr];
    else if (ZERO_IDLE) rdata <= '0;
  end

endmodule
