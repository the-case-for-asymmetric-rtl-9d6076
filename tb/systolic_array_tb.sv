// systolic_array_tb: matrix product through a bare array.
//
// A 4 x 5 array (rows differ from columns so a transposed mapping shows)
// gets a random signed weight tile by R shift cycles, bottom row first.
// Then N random input vectors are presented with row r delayed by r cycles.
// The result of vector n in column c must appear at psum_south[c] exactly
// R + c cycles after row 0 of that vector entered, equal to
// sum_r A[n][r] * W[r][c]. A second tile is loaded afterwards and checked
// the same way, so stale weights would show.
module systolic_array_tb;
  localparam int unsigned R  = 4;
  localparam int unsigned C  = 5;
  localparam int unsigned BH = 16;
  localparam int unsigned BV = 37;
  localparam int unsigned N  = 40;

  logic clk = 1'b0, rst_n = 1'b0, w_shift = 1'b0;
  logic [C-1:0][BH-1:0] w_north = '0;
  logic [R-1:0][BH-1:0] a_west = '0;
  logic [C-1:0][BV-1:0] psum_south;
  int checks = 0, failures = 0;

  shortint wt [R][C];
  shortint av [N][R];

  systolic_array #(.R(R), .C(C), .BH(BH), .BV(BV)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tile(bit dense);
    longint e;
    int n;
    for (int r = 0; r < int'(R); r++)
      for (int c = 0; c < int'(C); c++) wt[r][c] = shortint'($urandom);
    for (int n2 = 0; n2 < int'(N); n2++)
      for (int r = 0; r < int'(R); r++)
        av[n2][r] = dense ? shortint'($urandom) : shortint'($urandom % 4 == 0 ? 0 : $urandom % 32768);
    // preload: bottom row first
    for (int k = 0; k < int'(R); k++) begin
      w_shift = 1'b1;
      for (int c = 0; c < int'(C); c++) w_north[c] = wt[R-1-k][c];
      @(negedge clk);
    end
    w_shift = 1'b0;
    w_north = '0;
    // stream: cycle t presents av[t-r][r] on row r; check outputs
    for (int t = 0; t < int'(N + R + C + 1); t++) begin
      for (int r = 0; r < int'(R); r++)
        a_west[r] = (t - r >= 0 && t - r < int'(N)) ? av[t-r][r] : '0;
      for (int c = 0; c < int'(C); c++) begin
        n = t - int'(R) - c;
        if (n >= 0 && n < int'(N)) begin
          e = 0;
          for (int r = 0; r < int'(R); r++) e += longint'(av[n][r]) * longint'(wt[r][c]);
          checks++;
          if (psum_south[c] != BV'(e)) begin
            failures++;
            $display("FAIL vector %0d column %0d: got %0h expected %0h", n, c, psum_south[c], BV'(e));
          end
        end
      end
      @(negedge clk);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run_tile(1);
    run_tile(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
