// gqmv_kernel: one group-wise quantized matrix-vector multiplication kernel.
//
// Computes out[i] = sum_g ws[i][g] * xs[g] * sum_k wq[i][g*GS+k] * xq[g*GS+k]
// for i < m, where the matrix has N columns (N/GS groups per row), all data in
// DDR. On start the kernel first pre-fetches x into on-chip buffers
// (x_prefetch). It then starts four stages at once, which run concurrently
// as a dataflow pipeline joined by streams:
//
//   read_cast  --w_stream-->  dot_product  --group_sum_stream-->  accumulate
//   read_scale --ws_stream------------------------------------->  accumulate
//
// read_cast sets the pace at one 128-bit beat (16 weights) per cycle, i.e.
// one group every GS/16 = 16 cycles; a row takes 16*N/GS cycles. done pulses
// when the last out word has been written. The structure (pre-fetch, then
// dataflow through the three stages and these three streams) follows the
// paper. The start/busy/done control with arguments as ports, the separate
// read port for each of x, wq and ws, and the stream depths are this
// design's choices.
module gqmv_kernel
  import llamaf_pkg::*;
#(
  parameter int unsigned N = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  gqmv_args_t        args,
  output logic              busy,
  output logic              done,
  mem_rd_if.master          x_mem,
  mem_rd_if.master          wq_mem,
  mem_rd_if.master          ws_mem,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output fp32_t             wr_data
);
  localparam int unsigned G = N / GS;

  typedef enum logic [1:0] {IDLE, PREFETCH, RUN} state_t;
  state_t     state;
  gqmv_args_t a;

  logic pf_start, pf_done, run_start, rc_done, rs_done, acc_done;

  // x buffers
  logic                 xq_rd_en;
  logic [$clog2(G)-1:0] xq_rd_group;
  int16_t               xq_rd_data [GS];
  fp32_t                xs_vector  [G];

  // streams
  logic w_in_valid,  w_in_ready,  w_out_valid,  w_out_ready;
  logic ws_in_valid, ws_in_ready, ws_out_valid, ws_out_ready;
  logic gs_in_valid, gs_in_ready, gs_out_valid, gs_out_ready;
  logic [16*GS-1:0] w_in_data, w_out_data;
  logic [32*G-1:0]  ws_in_data, ws_out_data;
  int32_t           gs_in_data, gs_out_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      a         <= '0;
      pf_start  <= 1'b0;
      run_start <= 1'b0;
      done      <= 1'b0;
    end else begin
      pf_start  <= 1'b0;
      run_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          a <= args;
          if (args.m == '0) done <= 1'b1;
          else begin
            state    <= PREFETCH;
            pf_start <= 1'b1;
          end
        end
        PREFETCH: if (pf_done) begin
          state     <= RUN;
          run_start <= 1'b1;
        end
        RUN: if (acc_done) begin
          state <= IDLE;
          done  <= 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign busy = (state != IDLE);

  x_prefetch #(.N(N)) u_prefetch (
    .clk, .rst_n,
    .start(pf_start), .xq_addr(a.xq_addr), .xs_addr(a.xs_addr), .done(pf_done),
    .mem(x_mem),
    .rd_en(xq_rd_en), .rd_group(xq_rd_group), .rd_data(xq_rd_data),
    .xs_vector
  );

  read_cast #(.N(N)) u_read_cast (
    .clk, .rst_n,
    .start(run_start), .wq_addr(a.wq_addr), .m(a.m), .done(rc_done),
    .mem(wq_mem),
    .w_valid(w_in_valid), .w_ready(w_in_ready), .w_data(w_in_data)
  );

  read_scale #(.N(N)) u_read_scale (
    .clk, .rst_n,
    .start(run_start), .ws_addr(a.ws_addr), .m(a.m), .done(rs_done),
    .mem(ws_mem),
    .ws_valid(ws_in_valid), .ws_ready(ws_in_ready), .ws_data(ws_in_data)
  );

  stream_fifo #(.WIDTH(16*GS), .DEPTH(2)) u_w_stream (
    .clk, .rst_n,
    .in_valid(w_in_valid), .in_ready(w_in_ready), .in_data(w_in_data),
    .out_valid(w_out_valid), .out_ready(w_out_ready), .out_data(w_out_data)
  );

  stream_fifo #(.WIDTH(32*G), .DEPTH(2)) u_ws_stream (
    .clk, .rst_n,
    .in_valid(ws_in_valid), .in_ready(ws_in_ready), .in_data(ws_in_data),
    .out_valid(ws_out_valid), .out_ready(ws_out_ready), .out_data(ws_out_data)
  );

  dot_product #(.N(N)) u_dot (
    .clk, .rst_n,
    .clear(run_start),
    .w_valid(w_out_valid), .w_ready(w_out_ready), .w_data(w_out_data),
    .xq_rd_en, .xq_rd_group, .xq_rd_data,
    .gs_valid(gs_in_valid), .gs_ready(gs_in_ready), .gs_data(gs_in_data)
  );

  stream_fifo #(.WIDTH(32), .DEPTH(4)) u_gs_stream (
    .clk, .rst_n,
    .in_valid(gs_in_valid), .in_ready(gs_in_ready), .in_data(gs_in_data),
    .out_valid(gs_out_valid), .out_ready(gs_out_ready), .out_data(gs_out_data)
  );

  accumulate #(.N(N)) u_acc (
    .clk, .rst_n,
    .start(run_start), .out_addr(a.out_addr), .m(a.m), .done(acc_done),
    .xs_vector,
    .ws_valid(ws_out_valid), .ws_ready(ws_out_ready), .ws_data(ws_out_data),
    .gs_valid(gs_out_valid), .gs_ready(gs_out_ready), .gs_data(gs_out_data),
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start)
    else $error("gqmv_kernel: start while busy is ignored");

endmodule
