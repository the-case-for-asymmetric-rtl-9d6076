// pe: weight-stationary processing element.
//
// Each PE keeps one weight in a register W, multiplies the input arriving
// from the west by it and adds the product to the partial sum arriving from
// the north. The sum is registered and leaves to the south on the BV-bit
// vertical bus; the input is registered and leaves to the east on the BH-bit
// horizontal bus. During weight preload (w_shift high) the weight register
// takes w_in, and its output w_out feeds the PE below, so a column of PEs is a
// shift register for weights. This structure (W register, multiplier, adder,
// east input register, south sum register) is the one the paper draws.
//
// Timing: psum_out(t+1) = psum_in(t) + a_in(t) * W(t); a_out(t+1) = a_in(t).
// Operands are signed two's complement and the product is sign-extended to BV
// bits; the sum wraps modulo 2^BV (37 bits cannot overflow for 32 rows of
// 16-bit operands). The signed format and the synchronous active-low reset
// are this design's choices.
module pe #(
  parameter int unsigned BH = sa_pkg::SA_BH,
  parameter int unsigned BV = sa_pkg::SA_BV
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          w_shift,
  input  logic [BH-1:0] w_in,
  output logic [BH-1:0] w_out,
  input  logic [BH-1:0] a_in,
  output logic [BH-1:0] a_out,
  input  logic [BV-1:0] psum_in,
  output logic [BV-1:0] psum_out
);

  if (BV < 2 * BH) begin : g_width_check
    $error("pe: BV must hold a full product (BV >= 2*BH)");
  end

  logic [BH-1:0]   w_q;
  logic [2*BH-1:0] prod;
  logic [BV-1:0]   sum;

  always_comb begin
    prod = $signed(a_in) * $signed(w_q);
    sum  = psum_in + BV'($signed(prod));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_q      <= '0;
      a_out    <= '0;
      psum_out <= '0;
    end else begin
      if (w_shift) w_q <= w_in;
      a_out    <= a_in;
      psum_out <= sum;
    end
  end

  assign w_out = w_q;

endmodule
