// input_buffer_tb: write / read-back test of the input buffer.
//
// Fills every address with random vectors, then reads all addresses in a
// random order, interleaved with idle cycles and further writes. Read data
// must match the reference memory one cycle after rd_en and must be zero in
// cycles that follow no read.
module input_buffer_tb;
  localparam int unsigned LANES = 4;
  localparam int unsigned W     = 16;
  localparam int unsigned DEPTH = 32;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 1'b0, wr_en = 1'b0, rd_en = 1'b0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [LANES-1:0][W-1:0] wr_data = '0, rd_data;
  logic [LANES-1:0][W-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  input_buffer #(.LANES(LANES), .W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LANES-1:0][W-1:0] exp;
    logic                    was_read;
    @(negedge clk);
    for (int a = 0; a < int'(DEPTH); a++) begin
      wr_en = 1'b1; wr_addr = AW'(a);
      for (int l = 0; l < int'(LANES); l++) wr_data[l] = W'($urandom);
      ref_mem[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 1'b0;
    for (int t = 0; t < 600; t++) begin
      rd_en   = ($urandom % 3) != 0;
      rd_addr = AW'($urandom);
      was_read = rd_en;
      exp = rd_en ? ref_mem[rd_addr] : '0;
      // a simultaneous write to another address must not disturb the read
      wr_en   = ($urandom % 4) == 0;
      wr_addr = AW'($urandom);
      if (wr_addr == rd_addr) wr_en = 1'b0;
      for (int l = 0; l < int'(LANES); l++) wr_data[l] = W'($urandom);
      if (wr_en) ref_mem[wr_addr] = wr_data;
      @(negedge clk);
      checks++;
      if (rd_data != exp) begin
        failures++;
        $display("FAIL t=%0d read=%0d got %h expected %h", t, was_read, rd_data, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
