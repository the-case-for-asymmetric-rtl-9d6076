// sa_controller_tb: cycle-exact check of the operation sequence.
//
// A small controller (R = 4, C = 3) runs a series of commands, plain and
// accumulating, of 1 to 20 vectors, some issued while the previous one is
// still busy. The testbench plays the column accumulators (res_valid is
// acc_en delayed by one cycle) and records every strobe with its cycle. For
// each command accepted in cycle s it checks: weight reads in cycles s+1 ..
// s+R at w_base+R-1 down to w_base, w_shift one cycle after each weight
// read, input reads in cycles s+R+1 .. s+R+N at a_base+n, acc_en R+C cycles
// after each input read with acc_first as the mode demands, output writes at
// o_base+n, done one cycle after the last write, i.e. 2R+C+N+2 cycles after
// s, and cmd_ready low from s+1 until the done cycle.
module sa_controller_tb;
  localparam int unsigned R    = 4;
  localparam int unsigned C    = 3;
  localparam int unsigned AW_A = 6;
  localparam int unsigned AW_W = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0, cmd_ready, cmd_accumulate = 1'b0;
  logic [AW_W-1:0] cmd_w_base = '0, wb_rd_addr;
  logic [AW_A-1:0] cmd_a_base = '0, cmd_o_base = '0, ib_rd_addr, ob_wr_addr;
  logic [AW_A:0]   cmd_n_vec = '0;
  logic wb_rd_en, w_shift, ib_rd_en, acc_en, acc_first, ob_wr_en, busy, done;
  logic res_valid = 1'b0;
  int checks = 0, failures = 0;
  int cyc = 0;

  sa_controller #(.R(R), .C(C), .AW_A(AW_A), .AW_W(AW_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    res_valid <= rst_n && acc_en;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // event log, sampled in the middle of each cycle
  int wb_c[$], wb_a[$], ws_c[$], ib_c[$], ib_a[$], ae_c[$], af_v[$], ow_c[$], ow_a[$], dn_c[$];
  int acc_c[$], rdy_hi[$];
  always @(negedge clk) if (rst_n) begin
    if (wb_rd_en) begin wb_c.push_back(cyc); wb_a.push_back(int'(wb_rd_addr)); end
    if (w_shift)  ws_c.push_back(cyc);
    if (ib_rd_en) begin ib_c.push_back(cyc); ib_a.push_back(int'(ib_rd_addr)); end
    if (acc_en)   begin ae_c.push_back(cyc); af_v.push_back(int'(acc_first)); end
    if (ob_wr_en) begin ow_c.push_back(cyc); ow_a.push_back(int'(ob_wr_addr)); end
    if (done)     dn_c.push_back(cyc);
    if (cmd_valid && cmd_ready) acc_c.push_back(cyc);
    if (cmd_ready) rdy_hi.push_back(cyc);
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(int wb, int ab, int ob, int n, bit acc);
    int s;
    cmd_valid = 1'b1; cmd_w_base = AW_W'(wb); cmd_a_base = AW_A'(ab);
    cmd_o_base = AW_A'(ob); cmd_n_vec = (AW_A+1)'(n); cmd_accumulate = acc;
    do @(negedge clk); while (acc_c.size() == 0);
    cmd_valid = 1'b0;
    s = acc_c.pop_front();
    while (dn_c.size() == 0) @(negedge clk);
    chk("done cycle", dn_c.pop_front(), s + 2*R + C + n + 2);
    for (int k = 0; k < int'(R); k++) begin
      chk("weight read cycle", wb_c.pop_front(), s + 1 + k);
      chk("weight read addr", wb_a.pop_front(), (wb + int'(R) - 1 - k) % (1 << AW_W));
      chk("w_shift cycle", ws_c.pop_front(), s + 2 + k);
    end
    for (int k = 0; k < n; k++) begin
      int ic;
      ic = ib_c.pop_front();
      chk("input read cycle", ic, s + int'(R) + 1 + k);
      chk("input read addr", ib_a.pop_front(), ab + k);
      chk("acc_en cycle", ae_c.pop_front(), ic + int'(R + C));
      chk("acc_first", af_v.pop_front(), (!acc || k == 0) ? 1 : 0);
      chk("output write cycle", ow_c.pop_front(), ic + int'(R + C) + 1);
      chk("output write addr", ow_a.pop_front(), ob + k);
    end
    // cmd_ready must have been low from s+1 to the done cycle
    while (rdy_hi.size() > 0 && rdy_hi[0] <= s) void'(rdy_hi.pop_front());
    checks++;
    if (rdy_hi.size() == 0 || rdy_hi[0] != s + 2*int'(R) + int'(C) + n + 2) begin
      failures++;
      $display("FAIL cmd_ready came back at the wrong time");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    chk("idle ready", int'(cmd_ready), 1);
    run(0, 0, 0, 8, 1'b0);
    run(4, 10, 20, 20, 1'b0);
    run(8, 3, 40, 1, 1'b0);
    run(30, 0, 0, 12, 1'b1);   // weight base wraps around the buffer
    run(12, 50, 50, 13, 1'b1);
    for (int i = 0; i < 5; i++) run($urandom % 32, $urandom % 40, $urandom % 40, 1 + $urandom % 20, 1'($urandom));
    chk("no stray strobes", wb_c.size() + ib_c.size() + ae_c.size() + ow_c.size() + dn_c.size(), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
