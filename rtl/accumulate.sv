// accumulate: scales the group sums of a row and writes the FP32 result.
//
// The accumulate stage. For each row i it takes the row's N/GS weight scales
// from ws_stream and, group by group, multiplies the weight scale by the
// cached activation scale of the same group (the element of float_scale),
// converts the INT32 group sum from group_sum_stream to FP32, multiplies the
// two and adds the product to the row sum. After the last group the sum is
// written to out[i] in DDR. The order of operations, (ws * xs) * float(sum),
// and the FP32 types follow the paper. Handling one group in three cycles
// (scale and convert, multiply, add), summing in group order from +0.0 and
// writing each result as one 32-bit word at out_addr + 4*i are this
// design's choices; three cycles per group is far below the sixteen cycles a
// group of weights takes to arrive, so this stage never limits the rate.
//
// Interface: ws_* and gs_* are valid/ready streams, wr_* a valid/ready write
// port. start (with out_addr, m) begins a matrix; done pulses after the last
// write has been accepted.
module accumulate
  import llamaf_pkg::*;
#(
  parameter int unsigned N = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] out_addr,
  input  logic [31:0]       m,
  output logic              done,
  input  fp32_t             xs_vector [N/GS],
  input  logic              ws_valid,
  output logic              ws_ready,
  input  logic [32*(N/GS)-1:0] ws_data,
  input  logic              gs_valid,
  output logic              gs_ready,
  input  int32_t            gs_data,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output fp32_t             wr_data
);
  localparam int unsigned G = N / GS;

  typedef enum logic [2:0] {IDLE, WAIT_ROW, SCALE, MULT, ADD, WRITE} state_t;
  state_t state;

  logic [32*G-1:0]      ws_row;
  logic [$clog2(G)-1:0] grp;
  logic [31:0]          row, rows;
  logic [ADDR_W-1:0]    base;
  fp32_t                ws_g, fscale, fscale_r, gsum_f, gsum_r, prod, prod_r, sum, sum_next;

  assign ws_g = ws_row[32*grp +: 32];

  fp32_mul      u_scale (.a(ws_g),     .b(xs_vector[grp]), .y(fscale));
  int32_to_fp32 u_cast  (.a(gs_data),  .y(gsum_f));
  fp32_mul      u_mult  (.a(fscale_r), .b(gsum_r),         .y(prod));
  fp32_add      u_add   (.a(sum),      .b(prod_r),         .y(sum_next));

  assign ws_ready = (state == WAIT_ROW);
  assign gs_ready = (state == SCALE);
  assign wr_valid = (state == WRITE);
  assign wr_addr  = base + ADDR_W'({row, 2'b00});
  assign wr_data  = sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      ws_row   <= '0;
      grp      <= '0;
      row      <= '0;
      rows     <= '0;
      base     <= '0;
      fscale_r <= '0;
      gsum_r   <= '0;
      prod_r   <= '0;
      sum      <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          base  <= out_addr;
          rows  <= m;
          row   <= '0;
          state <= (m == '0) ? IDLE : WAIT_ROW;
          done  <= (m == '0);
        end
        WAIT_ROW: if (ws_valid) begin
          ws_row <= ws_data;
          grp    <= '0;
          sum    <= '0;
          state  <= SCALE;
        end
        SCALE: if (gs_valid) begin
          fscale_r <= fscale;
          gsum_r   <= gsum_f;
          state    <= MULT;
        end
        MULT: begin
          prod_r <= prod;
          state  <= ADD;
        end
        ADD: begin
          sum <= sum_next;
          if (grp == $clog2(G)'(G - 1)) state <= WRITE;
          else begin
            grp   <= grp + 1'b1;
            state <= SCALE;
          end
        end
        WRITE: if (wr_ready) begin
          if (row == rows - 1) begin
            state <= IDLE;
            done  <= 1'b1;
          end else begin
            row   <= row + 1;
            state <= WAIT_ROW;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_wr_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              (wr_valid && !wr_ready) |=> (wr_valid && $stable(wr_addr) && $stable(wr_data)));

endmodule
