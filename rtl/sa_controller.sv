// sa_controller: sequencer of one weight-stationary matrix operation.
//
// An operation (sa_cmd_t, accepted with cmd_valid && cmd_ready) runs in three
// phases:
//   LOAD_W  R cycles. Rows w_base+R-1 down to w_base of the weight buffer are
//           read, one per cycle; w_shift follows each read by one cycle (the
//           buffer's read latency), so the tile's row r ends in array row r.
//   STREAM  n_vec cycles. Input vectors a_base .. a_base+n_vec-1 are read, one
//           per cycle. For each read a valid bit and a "first" bit enter a
//           delay line of R+C stages, the time from the read to the moment the
//           de-skewed column results reach the column accumulators (1 cycle
//           buffer read, R+C-1 cycles through skew, array and de-skew).
//   DRAIN   until the last result is written.
// acc_en/acc_first drive the column accumulators. first is set on every
// vector for a plain product, and only on the first vector when
// cmd.accumulate is set (the accumulators then keep running sums).
// res_valid is the accumulators' q_valid and is passed straight on as the
// output-buffer write strobe: each one writes the result vector into the
// output buffer at o_base, o_base+1, ... (ob_wr_en/ob_wr_addr). done
// pulses for one cycle after the last write, when the operation's results can
// be read; cmd_ready is high only in IDLE.
//
// The paper says only that weights are preloaded and inputs fed from the west
// in pre-orchestrated movements. The phases, the command format and the
// valid/ready handshake are this design's choices. The weight tile is not
// double-buffered, so preload and streaming do not overlap.
module sa_controller
  import sa_pkg::*;
#(
  parameter int unsigned R    = SA_ROWS,
  parameter int unsigned C    = SA_COLS,
  parameter int unsigned AW_A = $clog2(SA_A_DEPTH),
  parameter int unsigned AW_W = $clog2(SA_W_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  // command
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  logic [AW_W-1:0] cmd_w_base,
  input  logic [AW_A-1:0] cmd_a_base,
  input  logic [AW_A-1:0] cmd_o_base,
  input  logic [AW_A:0]   cmd_n_vec,
  input  logic            cmd_accumulate,
  // weight buffer / array
  output logic            wb_rd_en,
  output logic [AW_W-1:0] wb_rd_addr,
  output logic            w_shift,
  // input buffer
  output logic            ib_rd_en,
  output logic [AW_A-1:0] ib_rd_addr,
  // column accumulators
  output logic            acc_en,
  output logic            acc_first,
  input  logic            res_valid,
  // output buffer
  output logic            ob_wr_en,
  output logic [AW_A-1:0] ob_wr_addr,
  // status
  output logic            busy,
  output logic            done
);

  localparam int unsigned LAT = R + C;

  sa_state_e       state;
  logic [AW_W-1:0] w_base;
  logic [AW_A-1:0] a_base;
  logic [AW_A-1:0] o_ptr;
  logic [AW_A:0]   n_vec;
  logic            accumulate;
  logic [AW_A:0]   cnt;        // rows loaded / vectors issued
  logic [AW_A:0]   wr_cnt;     // result vectors written
  logic [LAT-1:0]  vld_sr;
  logic [LAT-1:0]  first_sr;

  assign cmd_ready  = (state == ST_IDLE);
  assign busy       = (state != ST_IDLE);

  assign wb_rd_en   = (state == ST_LOAD_W);
  assign wb_rd_addr = w_base + AW_W'(R - 1) - cnt[AW_W-1:0];
  assign ib_rd_en   = (state == ST_STREAM);
  assign ib_rd_addr = a_base + cnt[AW_A-1:0];

  assign acc_en     = vld_sr[LAT-1];
  assign acc_first  = first_sr[LAT-1];
  assign ob_wr_en   = res_valid;
  assign ob_wr_addr = o_ptr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= ST_IDLE;
      w_base     <= '0;
      a_base     <= '0;
      o_ptr      <= '0;
      n_vec      <= '0;
      accumulate <= 1'b0;
      cnt        <= '0;
      wr_cnt     <= '0;
      w_shift    <= 1'b0;
      vld_sr     <= '0;
      first_sr   <= '0;
      done       <= 1'b0;
    end else begin
      w_shift  <= wb_rd_en;
      vld_sr   <= {vld_sr[LAT-2:0], ib_rd_en};
      first_sr <= {first_sr[LAT-2:0], ib_rd_en && (!accumulate || cnt == '0)};
      done     <= 1'b0;
      if (res_valid) begin
        o_ptr  <= o_ptr + 1'b1;
        wr_cnt <= wr_cnt + 1'b1;
      end
      unique case (state)
        ST_IDLE: begin
          if (cmd_valid) begin
            w_base     <= cmd_w_base;
            a_base     <= cmd_a_base;
            o_ptr      <= cmd_o_base;
            n_vec      <= cmd_n_vec;
            accumulate <= cmd_accumulate;
            cnt        <= '0;
            wr_cnt     <= '0;
            state      <= ST_LOAD_W;
          end
        end
        ST_LOAD_W: begin
          if (cnt == (AW_A+1)'(R - 1)) begin
            cnt   <= '0;
            state <= ST_STREAM;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        ST_STREAM: begin
          cnt <= cnt + 1'b1;
          if (cnt == n_vec - 1'b1) state <= ST_DRAIN;
        end
        ST_DRAIN: begin
          if (res_valid && wr_cnt == n_vec - 1'b1) begin
            done  <= 1'b1;
            state <= ST_IDLE;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // A command must ask for at least one vector and stay inside the buffers.
  a_cmd_nonzero : assert property (@(posedge clk) disable iff (!rst_n)
      cmd_valid && cmd_ready |-> cmd_n_vec != '0);
  a_cmd_in_range : assert property (@(posedge clk) disable iff (!rst_n)
      cmd_valid && cmd_ready |->
        (AW_A+2)'(cmd_a_base) + (AW_A+2)'(cmd_n_vec) <= (AW_A+2)'(1 << AW_A) &&
        (AW_A+2)'(cmd_o_base) + (AW_A+2)'(cmd_n_vec) <= (AW_A+2)'(1 << AW_A));
  // Results only come back while an operation is running.
  a_res_in_op : assert property (@(posedge clk) disable iff (!rst_n)
      res_valid |-> busy);

endmodule
