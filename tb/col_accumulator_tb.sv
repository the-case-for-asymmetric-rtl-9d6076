// col_accumulator_tb: random en/first/d against a reference accumulator.
//
// After every cycle q must equal the model (load on first, add otherwise,
// hold when en is low, modulo 2^BV) and q_valid must equal en of the
// previous cycle.
module col_accumulator_tb;
  localparam int unsigned BV = 37;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, first = 1'b0, q_valid;
  logic [BV-1:0] d = '0, q;
  int checks = 0, failures = 0;

  col_accumulator #(.BV(BV)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [BV-1:0] model;
    logic          en_q;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    model = '0;
    for (int t = 0; t < 2000; t++) begin
      en    = ($urandom % 4) != 0;
      first = ($urandom % 5) == 0;
      d     = BV'({$urandom, $urandom});
      en_q  = en;
      if (en) model = first ? d : model + d;
      @(negedge clk);
      checks += 2;
      if (q != model) begin failures++; $display("FAIL q t=%0d %0h vs %0h", t, q, model); end
      if (q_valid != en_q) begin failures++; $display("FAIL q_valid t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
