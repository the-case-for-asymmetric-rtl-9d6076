// asym_sa_top_full_tb: end-to-end test of the accelerator at its default size (32 x 32 array, 16-bit operands, 37-bit sums,
// default buffer depths; the top is instantiated without parameters).
//
// The host side writes random weight tiles and input vectors into the
// buffers, issues operations and reads the results back. Every result vector
// is compared with a reference product computed here from the same data:
// out[n][c] = sum_r A[a_base+n][r] * W[w_base+r][c], or its running sum over
// n in accumulate mode, modulo 2^BV. The number of cycles from acceptance of
// a command to done must be 2R + C + N + 2.
// Mechanisms that must each occur at least once (else a failure is counted):
// weight-tile preload, plain operation, accumulate operation, a command held
// back while the previous one is busy, a change of weight tile between
// operations, and ReLU-like sparse inputs (zeros) as well as dense signed
// inputs with the extreme values -32768 and 32767.
module asym_sa_top_full_tb;
  localparam int unsigned R       = 32;
  localparam int unsigned C       = 32;
  localparam int unsigned BH      = 16;
  localparam int unsigned BV      = 37;
  localparam int unsigned A_DEPTH = 4096;
  localparam int unsigned W_DEPTH = 1024;
  localparam int unsigned AW_A    = $clog2(A_DEPTH);
  localparam int unsigned AW_W    = $clog2(W_DEPTH);
  localparam int unsigned NOPS    = 6;
  localparam longint      OVH     = 64'(2*R) + 64'(C) + 64'd2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic                 ib_wr_en = 1'b0, wb_wr_en = 1'b0, ob_rd_en = 1'b0;
  logic [AW_A-1:0]      ib_wr_addr = '0, ob_rd_addr = '0;
  logic [AW_W-1:0]      wb_wr_addr = '0;
  logic [R-1:0][BH-1:0] ib_wr_data = '0;
  logic [C-1:0][BH-1:0] wb_wr_data = '0;
  logic [C-1:0][BV-1:0] ob_rd_data;
  logic                 cmd_valid = 1'b0, cmd_ready, cmd_accumulate = 1'b0;
  logic [AW_W-1:0]      cmd_w_base = '0;
  logic [AW_A-1:0]      cmd_a_base = '0, cmd_o_base = '0;
  logic [AW_A:0]        cmd_n_vec = '0;
  logic                 busy, done;

  asym_sa_top u_dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // reference copies of the buffers
  shortint a_ref [A_DEPTH][R];
  shortint w_ref [W_DEPTH][C];

  // mechanism counters
  int n_preload = 0, n_plain = 0, n_accum = 0, n_cmd_wait = 0, n_tile_change = 0;
  int n_zero_in = 0, n_extreme = 0;

  // operations issued
  int op_w[NOPS], op_a[NOPS], op_o[NOPS], op_n[NOPS];
  bit op_acc[NOPS];
  longint op_start[NOPS], op_done[NOPS];
  int n_issued = 0, n_done = 0;

  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && !cmd_ready) n_cmd_wait++;
    if (cmd_valid && cmd_ready) op_start[n_issued] <= cyc;
    if (done) begin op_done[n_done] <= cyc; n_done <= n_done + 1; end
  end

  // count preloads: rising edges of the weight shift
  logic w_shift_d = 1'b0;
  always @(posedge clk) begin
    w_shift_d <= u_dut.w_shift;
    if (u_dut.w_shift && !w_shift_d) n_preload++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_tile(int base);
    for (int r = 0; r < int'(R); r++) begin
      @(negedge clk);
      wb_wr_en = 1'b1; wb_wr_addr = AW_W'(base + r);
      for (int c = 0; c < int'(C); c++) begin
        w_ref[base + r][c] = (r == 0 && c == 0) ? -16'sd32768 : shortint'($urandom);
        wb_wr_data[c] = w_ref[base + r][c];
      end
    end
    @(negedge clk);
    wb_wr_en = 1'b0;
  endtask

  // sparse = 1: non-negative values with about half zeros, as after ReLU
  task automatic write_inputs(int base, int n, bit sparse);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      ib_wr_en = 1'b1; ib_wr_addr = AW_A'(base + k);
      for (int r = 0; r < int'(R); r++) begin
        if (sparse) a_ref[base + k][r] = (($urandom % 2) != 0) ? 16'sd0 : shortint'($urandom % 32768);
        else if (k == 0) a_ref[base + k][r] = ((r % 2) != 0) ? 16'sd32767 : -16'sd32768;
        else a_ref[base + k][r] = shortint'($urandom);
        if (a_ref[base + k][r] == 0) n_zero_in++;
        if (a_ref[base + k][r] == -16'sd32768 || a_ref[base + k][r] == 16'sd32767) n_extreme++;
        ib_wr_data[r] = a_ref[base + k][r];
      end
    end
    @(negedge clk);
    ib_wr_en = 1'b0;
  endtask

  task automatic issue(int wb, int ab, int ob, int n, bit acc);
    op_w[n_issued] = wb; op_a[n_issued] = ab; op_o[n_issued] = ob;
    op_n[n_issued] = n;  op_acc[n_issued] = acc;
    @(negedge clk);
    cmd_valid = 1'b1; cmd_w_base = AW_W'(wb); cmd_a_base = AW_A'(ab);
    cmd_o_base = AW_A'(ob); cmd_n_vec = (AW_A+1)'(n); cmd_accumulate = acc;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
    if (acc) n_accum++; else n_plain++;
    if (n_issued > 0 && op_w[n_issued-1] != wb) n_tile_change++;
    n_issued++;
  endtask

  task automatic check_op(int i);
    longint e [C];
    for (int c = 0; c < int'(C); c++) e[c] = 0;
    checks++;
    if (op_done[i] - op_start[i] - longint'(op_n[i]) != OVH) begin
      failures++;
      $display("FAIL op %0d latency %0d expected %0d", i, op_done[i] - op_start[i], 2*R + C + op_n[i] + 2);
    end
    for (int k = 0; k < op_n[i]; k++) begin
      @(negedge clk);
      ob_rd_en = 1'b1; ob_rd_addr = AW_A'(op_o[i] + k);
      @(negedge clk);
      ob_rd_en = 1'b0;
      for (int c = 0; c < int'(C); c++) begin
        longint s;
        s = 0;
        for (int r = 0; r < int'(R); r++)
          s += longint'(a_ref[op_a[i] + k][r]) * longint'(w_ref[op_w[i] + r][c]);
        e[c] = op_acc[i] ? e[c] + s : s;
        checks++;
        if (ob_rd_data[c] != BV'(e[c])) begin
          failures++;
          if (failures < 10)
            $display("FAIL op %0d vector %0d column %0d: got %0h expected %0h", i, k, c, ob_rd_data[c], BV'(e[c]));
        end
      end
    end
  endtask

  task automatic mech(string what, int n);
    checks++;
    $display("mechanism %-28s happened %0d times", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism %s never happened", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    write_tile(0);
    write_tile(R);
    write_tile(2 * R);
    write_inputs(0, 256, 1'b0);
    write_inputs(256, 256, 1'b1);
    // plain product, tile 0, dense inputs
    issue(0, 0, 0, 256, 1'b0);
    // issued while the first is busy: held until ready; new tile, sparse inputs
    issue(R, 256, 256, 256, 1'b0);
    // accumulate mode over the dense inputs
    issue(2 * R, 0, 2 * 256, 256, 1'b1);
    // single-vector operation, same tile as before
    issue(2 * R, 256 + 3, 3 * 256, 1, 1'b0);
    // accumulate, sparse inputs, back to tile 0
    issue(0, 256, 3 * 256 + 1, 256, 1'b1);
    // the whole input region at once with tile 1
    issue(R, 0, 4 * 256 + 1, 2 * 256, 1'b0);
    while (n_done < n_issued) @(negedge clk);
    @(negedge clk);
    checks++;
    if (busy || !cmd_ready) begin failures++; $display("FAIL not idle at the end"); end
    for (int i = 0; i < n_issued; i++) check_op(i);
    mech("weight preload", n_preload);
    mech("plain operation", n_plain);
    mech("accumulate operation", n_accum);
    mech("command held while busy", n_cmd_wait);
    mech("weight tile change", n_tile_change);
    mech("zero (ReLU) inputs", n_zero_in);
    mech("extreme inputs", n_extreme);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
