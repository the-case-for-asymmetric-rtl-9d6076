// skew_buffer: triangular bank of delay lines.
//
// Lane i of d is delayed by i clock cycles (REVERSE = 0) or by N-1-i cycles
// (REVERSE = 1) before it appears on q; lane 0 (or lane N-1) is a plain wire.
// With REVERSE = 0 it staggers the input vectors so that array row r receives
// its element r cycles after row 0, the diagonal feed a weight-stationary
// array needs. With REVERSE = 1 it undoes the column stagger at the south
// edge so that all C results of one input vector leave in the same cycle.
// The paper shows the staggered operands; building it from plain registers is
// this design's choice. Registers reset to zero. The lane with zero delay is
// a plain wire from d to q by construction.
module skew_buffer #(
  parameter int unsigned N       = sa_pkg::SA_ROWS,
  parameter int unsigned W       = sa_pkg::SA_BH,
  parameter bit          REVERSE = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0][W-1:0] d,
  output logic [N-1:0][W-1:0] q
);

  for (genvar i = 0; i < N; i++) begin : g_lane
    localparam int unsigned DLY = REVERSE ? (N - 1 - i) : i;
    if (DLY == 0) begin : g_wire
      assign q[i] = d[i];
    end else begin : g_dly
      logic [W-1:0] sr [DLY];
      always_ff @(posedge clk) begin
        if (!rst_n) begin
          for (int k = 0; k < int'(DLY); k++) sr[k] <= '0;
        end else begin
          sr[0] <= d[i];
          for (int k = 1; k < int'(DLY); k++) sr[k] <= sr[k-1];
        end
      end
      assign q[i] = sr[DLY-1];
    end
  end

endmodule
