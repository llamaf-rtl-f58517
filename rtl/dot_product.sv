// dot_product: GS-lane SIMD dot product of a weight group with x.
//
// The dot-product stage. Each vector taken from w_stream holds the GS INT16
// weights of one quantization group; a counter tracks which of the N/GS groups
// of the row it is, and the cached xq vector of the same group is read from
// the x buffer. The GS lane products are formed in parallel as INT16 (an INT8
// by INT8 product always fits), then summed by an adder tree of log2(GS) = 8
// levels whose first level widens to INT32. The root is the group sum, pushed
// on group_sum_stream. All of this follows the paper. Registering after the
// read, after the multipliers and after every tree level is this design's
// choice; the whole pipeline (latency 2 + log2(GS) cycles) advances only
// when its output register is empty or being read, so a full
// group_sum_stream stalls it without losing a group.
//
// Interface: w_* (lane k in bits [16k +: 16]) in, gs_* out, x buffer port
// xq_rd_* with one cycle read latency. clear resets the group counter at the
// start of a matrix, in a cycle without a w transfer.
module dot_product
  import llamaf_pkg::*;
#(
  parameter int unsigned N = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              w_valid,
  output logic              w_ready,
  input  logic [16*GS-1:0]  w_data,
  output logic              xq_rd_en,
  output logic [$clog2(N/GS)-1:0] xq_rd_group,
  input  int16_t            xq_rd_data [GS],
  output logic              gs_valid,
  input  logic              gs_ready,
  output int32_t            gs_data
);
  localparam int unsigned G      = N / GS;
  localparam int unsigned LEVELS = $clog2(GS);

  logic                   en;
  logic [LEVELS+1:0]      vld;          // vld[0]: read stage, vld[1]: products, vld[2+l]: tree level l+1
  logic [16*GS-1:0]       w_r;
  int16_t                 prod [GS];
  logic [$clog2(G)-1:0]   grp;

  assign en          = !vld[LEVELS+1] || gs_ready;
  assign w_ready     = en;
  assign xq_rd_en    = en;
  assign xq_rd_group = grp;
  assign gs_valid    = vld[LEVELS+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      grp <= '0;
    end else begin
      if (clear) grp <= '0;
      else if (w_valid && w_ready)
        grp <= (grp == $clog2(G)'(G - 1)) ? '0 : grp + 1'b1;
      if (en) vld <= {vld[LEVELS:0], w_valid};
    end
  end

  // read stage: weights held while the x buffer returns the matching group
  always_ff @(posedge clk) begin
    if (en) w_r <= w_data;
  end

  // SIMD multiply: entrywise INT16 product vector
  always_ff @(posedge clk) begin
    if (en)
      for (int k = 0; k < int'(GS); k++)
        prod[k] <= mul16(w_r[16*k +: 16], xq_rd_data[k]);
  end

  // adder tree: node[l] holds the GS >> (l+1) sums of level l+1; level 1
  // casts the INT16 products to INT32
  int32_t node [LEVELS][GS/2];

  always_ff @(posedge clk) begin
    if (en) begin
      for (int k = 0; k < int'(GS / 2); k++)
        node[0][k] <= int16_to_32(prod[2*k]) + int16_to_32(prod[2*k+1]);
      for (int l = 1; l < int'(LEVELS); l++)
        for (int k = 0; k < int'(GS >> (l + 1)); k++)
          node[l][k] <= node[l-1][2*k] + node[l-1][2*k+1];
    end
  end

  assign gs_data = node[LEVELS-1][0];

  // the group counter restarts only between matrices
  a_clear_idle: assert property (@(posedge clk) disable iff (!rst_n) clear |-> !(w_valid && w_ready));

endmodule
