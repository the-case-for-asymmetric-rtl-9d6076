// col_accumulator: adder and register at the south end of one array column.
//
// When en is high the register takes d (first = 1, a new sum starts) or
// q + d (first = 0, the column result is added to the value fed back from the
// register). q_valid is high in the cycle after an update, when q holds the
// new value, and is the write strobe towards the output buffer. The adder,
// register and feedback path follow the figure of the generic array; the
// en/first control and the wrap-around at BV bits are this design's choices.
module col_accumulator #(
  parameter int unsigned BV = sa_pkg::SA_BV
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          first,
  input  logic [BV-1:0] d,
  output logic [BV-1:0] q,
  output logic          q_valid
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q       <= '0;
      q_valid <= 1'b0;
    end else begin
      q_valid <= en;
      if (en) q <= first ? d : q + d;
    end
  end

endmodule
