// skew_buffer_tb: checks both directions of the triangular delay lines.
//
// Random words enter every lane each cycle; lane i of the forward instance
// must show the word from i cycles earlier, lane i of the reverse instance
// the word from N-1-i cycles earlier (zero before anything was shifted in).
module skew_buffer_tb;
  localparam int unsigned N = 5;
  localparam int unsigned W = 12;
  localparam int unsigned T = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0][W-1:0] d = '0, qf, qr;
  logic [N-1:0][W-1:0] hist [T];
  int checks = 0, failures = 0;

  skew_buffer #(.N(N), .W(W), .REVERSE(1'b0)) u_fwd (.clk, .rst_n, .d, .q(qf));
  skew_buffer #(.N(N), .W(W), .REVERSE(1'b1)) u_rev (.clk, .rst_n, .d, .q(qr));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] ef, er;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < T; t++) begin
      for (int i = 0; i < N; i++) d[i] = W'($urandom);
      hist[t] = d;
      #1;
      for (int i = 0; i < N; i++) begin
        ef = (t >= i) ? hist[t-i][i] : '0;
        er = (t >= N-1-i) ? hist[t-(N-1-i)][i] : '0;
        checks += 2;
        if (qf[i] != ef) begin failures++; $display("FAIL fwd t=%0d lane %0d", t, i); end
        if (qr[i] != er) begin failures++; $display("FAIL rev t=%0d lane %0d", t, i); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
