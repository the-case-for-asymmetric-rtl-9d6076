// pe_tb: self-checking test of one processing element.
//
// Loads random signed weights through w_in/w_shift, then drives random
// inputs and partial sums every cycle and checks, one cycle later, that
// psum_out = psum_in + a_in * W (signed, BV bits), that a_out is a_in
// delayed by one cycle and that w_out holds the weight while w_shift is low.
// Includes the extreme operands -32768 * -32768 and sums near the BV limit.
module pe_tb;
  localparam int unsigned BH = 16;
  localparam int unsigned BV = 37;

  logic clk = 1'b0, rst_n = 1'b0, w_shift = 1'b0;
  logic [BH-1:0] w_in = '0, w_out, a_in = '0, a_out;
  logic [BV-1:0] psum_in = '0, psum_out;
  int checks = 0, failures = 0;

  pe #(.BH(BH), .BV(BV)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    shortint w, a;
    longint  p, e;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("psum after reset", longint'(psum_out), 0);
    for (int t = 0; t < 40; t++) begin
      // load a weight
      w = (t == 0) ? -16'sd32768 : shortint'($urandom);
      w_in = w; w_shift = 1'b1;
      @(negedge clk);
      w_shift = 1'b0;
      w_in = BH'($urandom);          // must be ignored
      check("w_out", longint'(w_out), longint'(w) & 64'hFFFF);
      for (int k = 0; k < 50; k++) begin
        a = (k == 0) ? -16'sd32768 : (k == 1 ? 16'sd32767 : shortint'($urandom));
        p = (k == 2) ? longint'({1'b0, {(BV-1){1'b1}}}) - 5 : longint'({$urandom, $urandom}) & ((64'd1 << BV) - 1);
        a_in = a; psum_in = BV'(p);
        e = (p + longint'(a) * longint'(w)) & ((64'd1 << BV) - 1);
        @(negedge clk);
        check("psum_out", longint'(psum_out), e);
        check("a_out", longint'(a_out), longint'(a) & 64'hFFFF);
        check("w_out held", longint'(w_out), longint'(w) & 64'hFFFF);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
