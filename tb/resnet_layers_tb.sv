// resnet_layers_tb: the six ResNet-50 convolution layers of the evaluation
// (L1..L6), run in full on the default 32 x 32 accelerator.
//
// A convolution with kernel K, output H x W, C input and M output channels is
// the matrix product of the im2col matrix (H*W rows, K*K*C columns) with the
// weight matrix (K*K*C x M). The accelerator holds one 32 x 32 weight tile
// (32 reduction indices x 32 output channels) and streams the H*W im2col rows
// through it. For every layer this testbench runs all K*K*C/32 reduction
// tiles times M/32 output-channel tiles: for each reduction tile it writes
// the im2col rows once, then for each channel tile writes the weight tile,
// runs one operation of H*W vectors and adds the results into the host-side
// output map. Every one of the H*W*M outputs is then compared with the
// convolution computed directly from activations and weights.
// Activations are a deterministic hash of (y, x, channel), non-negative with
// about half zeros (as after ReLU), zero in the padding of 3 x 3 layers
// (stride 1, padding 1); weights are random signed 16-bit values. Each
// operation must take 2R + C + N + 2 cycles.
//
// It also measures the average switching activity per bit of the two buses
// while an operation runs: a_h on the horizontal input bus (the 16-bit
// a_out of each PE) and a_v on the vertical partial-sum bus (the 37-bit
// psum_out), sampled on the 32 PEs of the array's diagonal. With these it
// prints the wire-power-optimal PE aspect ratio W/H = (BV a_v) / (BH a_h)
// and checks that a_h <= a_v, the relation the asymmetric floorplan relies
// on. The data here are synthetic, so the values differ from measurements
// on a trained network.
module resnet_layers_tb;
  localparam int unsigned R  = 32;
  localparam int unsigned C  = 32;
  localparam int unsigned BV = 37;
  localparam int          RI = 32;   // R and C as signed loop bounds
  localparam int          CI = 32;
  localparam longint      OVH  = 64'(2*R) + 64'(C) + 64'd2;  // preload + fill + drain

  logic clk = 1'b0, rst_n = 1'b0;
  logic                 ib_wr_en = 1'b0, wb_wr_en = 1'b0, ob_rd_en = 1'b0;
  logic [11:0]          ib_wr_addr = '0, ob_rd_addr = '0;
  logic [9:0]           wb_wr_addr = '0;
  logic [R-1:0][15:0]   ib_wr_data = '0;
  logic [C-1:0][15:0]   wb_wr_data = '0;
  logic [C-1:0][BV-1:0] ob_rd_data;
  logic                 cmd_valid = 1'b0, cmd_ready, cmd_accumulate = 1'b0;
  logic [9:0]           cmd_w_base = '0;
  logic [11:0]          cmd_a_base = '0, cmd_o_base = '0;
  logic [12:0]          cmd_n_vec = '0;
  logic                 busy, done;

  asym_sa_top u_dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // switching activity probes on the diagonal PEs
  longint tog_h [RI];
  longint tog_v [RI];
  longint n_samp = 0;
  for (genvar d = 0; d < RI; d++) begin : g_probe
    logic [15:0]   a_prev = '0;
    logic [BV-1:0] p_prev = '0;
    initial begin tog_h[d] = 0; tog_v[d] = 0; end
    always @(negedge clk) begin
      if (busy) begin
        tog_h[d] += longint'($countones(u_dut.u_array.g_row[d].g_col[d].u_pe.a_out ^ a_prev));
        tog_v[d] += longint'($countones(u_dut.u_array.g_row[d].g_col[d].u_pe.psum_out ^ p_prev));
      end
      a_prev = u_dut.u_array.g_row[d].g_col[d].u_pe.a_out;
      p_prev = u_dut.u_array.g_row[d].g_col[d].u_pe.psum_out;
    end
  end
  always @(negedge clk) if (busy) n_samp++;

  function automatic longint toggles(bit vertical);
    longint t;
    t = 0;
    for (int d = 0; d < RI; d++) t += vertical ? tog_v[d] : tog_h[d];
    return t;
  endfunction

  // average toggles per bit per cycle since the given snapshot
  function automatic real activity(bit vertical, longint t0, longint n0);
    return real'(toggles(vertical) - t0) / (real'(n_samp - n0) * RI * (vertical ? BV : 16));
  endfunction

  typedef struct { int k, h, w, c, m; } layer_t;
  layer_t layers [6] = '{
    '{1, 56, 56,  256,  64},
    '{3, 28, 28,  128, 128},
    '{1, 28, 28,  128, 512},
    '{1, 14, 14,  512, 256},
    '{1, 14, 14, 1024, 256},
    '{3, 14, 14,  256, 256}
  };

  shortint x_col [];      // im2col matrix of the current layer, [n*red + j]
  shortint wts [];        // weights of the current layer, [j*M + m]
  longint  host_sum [];   // accumulated outputs, [n*M + m]

  // activation at (y, x, ch) of an h x w map; zero outside (padding)
  function automatic shortint act(int li, int y, int x, int ch, int h, int w);
    int unsigned v;
    if (y < 0 || x < 0 || y >= h || x >= w) return 16'sd0;
    v = (li * 7919 + y * 104729 + x * 1299709 + ch * 15485863) * 32'h9E3779B1;
    v = v ^ (v >> 15);
    v = v * 32'h85EBCA6B;
    v = v ^ (v >> 13);
    if (v[0]) return 16'sd0;
    return shortint'(v[31:17]);   // 0 .. 32767
  endfunction

  // im2col element: output pixel n, reduction index j = (ky*K + kx)*C + ch
  function automatic shortint im2col(int li, int n, int j);
    int k, y, x, ky, kx, ch, pad;
    k   = layers[li].k;
    pad = (k - 1) / 2;
    y   = n / layers[li].w;
    x   = n % layers[li].w;
    ch  = j % layers[li].c;
    ky  = (j / layers[li].c) / k;
    kx  = (j / layers[li].c) % k;
    return act(li, y + ky - pad, x + kx - pad, ch, layers[li].h, layers[li].w);
  endfunction

  initial begin
    longint start, lat, e;
    int n_vec, red, m_ch, kt_n, mt_n, zeros, ops;
    longint th0, tv0, ns0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int li = 0; li < 6; li++) begin
      n_vec = layers[li].h * layers[li].w;
      red   = layers[li].k * layers[li].k * layers[li].c;
      m_ch  = layers[li].m;
      kt_n  = red / RI;
      mt_n  = m_ch / CI;
      x_col = new[n_vec * red];
      wts   = new[red * m_ch];
      host_sum = new[n_vec * m_ch];
      zeros = 0; ops = 0;
      th0 = toggles(1'b0); tv0 = toggles(1'b1); ns0 = n_samp;
      for (int n = 0; n < n_vec; n++)
        for (int j = 0; j < red; j++) begin
          x_col[n*red + j] = im2col(li, n, j);
          if (x_col[n*red + j] == 0) zeros++;
        end
      foreach (wts[i]) wts[i] = shortint'($urandom);
      foreach (host_sum[i]) host_sum[i] = 0;
      for (int kt = 0; kt < kt_n; kt++) begin
        // im2col rows of this reduction tile
        for (int n = 0; n < n_vec; n++) begin
          @(negedge clk);
          ib_wr_en = 1'b1; ib_wr_addr = 12'(n);
          for (int r = 0; r < RI; r++) ib_wr_data[r] = x_col[n*red + kt*RI + r];
        end
        @(negedge clk);
        ib_wr_en = 1'b0;
        for (int mt = 0; mt < mt_n; mt++) begin
          // weight tile (kt, mt), kept at alternating halves of the buffer
          for (int r = 0; r < RI; r++) begin
            @(negedge clk);
            wb_wr_en = 1'b1; wb_wr_addr = 10'((ops % 2) * R + r);
            for (int c = 0; c < CI; c++)
              wb_wr_data[c] = wts[(kt*RI + r)*m_ch + mt*CI + c];
          end
          @(negedge clk);
          wb_wr_en = 1'b0;
          cmd_valid = 1'b1; cmd_w_base = 10'((ops % 2) * R); cmd_a_base = '0;
          cmd_o_base = '0; cmd_n_vec = 13'(n_vec); cmd_accumulate = 1'b0;
          @(posedge clk);
          while (!cmd_ready) @(posedge clk);
          start = cyc;
          @(negedge clk);
          cmd_valid = 1'b0;
          @(posedge clk);
          while (!done) @(posedge clk);
          lat = cyc - start;
          ops++;
          checks++;
          if (lat != OVH + longint'(n_vec)) begin
            failures++;
            $display("FAIL L%0d tile %0d/%0d: %0d cycles, expected %0d", li + 1, kt, mt, lat, OVH + longint'(n_vec));
          end
          // read back and add into the output map
          for (int n = 0; n < n_vec; n++) begin
            @(negedge clk);
            ob_rd_en = 1'b1; ob_rd_addr = 12'(n);
            @(negedge clk);
            ob_rd_en = 1'b0;
            for (int c = 0; c < CI; c++)
              host_sum[n*m_ch + mt*CI + c] += longint'($signed(ob_rd_data[c]));
          end
        end
      end
      // direct convolution
      for (int n = 0; n < n_vec; n++)
        for (int m = 0; m < m_ch; m++) begin
          e = 0;
          for (int j = 0; j < red; j++)
            e += longint'(x_col[n*red + j]) * longint'(wts[j*m_ch + m]);
          checks++;
          if (host_sum[n*m_ch + m] != e) begin
            failures++;
            if (failures < 10) $display("FAIL L%0d pixel %0d channel %0d: %0d vs %0d", li + 1, n, m, host_sum[n*m_ch + m], e);
          end
        end
      $display("L%0d: K=%0d HxW=%0dx%0d C=%0d M=%0d: %0d operations of %0d vectors, %0d cycles each; %0d outputs checked; input zeros %0d%%",
               li + 1, layers[li].k, layers[li].h, layers[li].w, layers[li].c, layers[li].m,
               ops, n_vec, lat, n_vec * m_ch, longint'(100) * zeros / (longint'(n_vec) * red));
      $display("    switching activity a_h = %0.3f, a_v = %0.3f", activity(1'b0, th0, ns0), activity(1'b1, tv0, ns0));
    end
    begin
      real ah, av;
      ah = activity(1'b0, 0, 0);
      av = activity(1'b1, 0, 0);
      $display("switching activity over all layers: a_h = %0.3f (16-bit inputs), a_v = %0.3f (%0d-bit sums)", ah, av, BV);
      $display("wire-power-optimal PE aspect ratio W/H = (%0d * %0.3f) / (16 * %0.3f) = %0.2f", BV, av, ah, (BV * av) / (16.0 * ah));
      checks++;
      if (!(ah > 0.0 && ah <= av)) begin
        failures++;
        $display("FAIL expected 0 < a_h <= a_v");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
