// llamaf_top: the programmable-logic part of the Llama2 accelerator.
//
// Transformer inference at batch size one spends nearly all of its time in
// matrix-vector products. This top holds the two GQMV kernels that perform
// them, each a gqmv_kernel with its own column count: kernel 1 with
// N1 = dim = 2048 columns (8 groups of GS = 256) serves the QKV, output,
// W1/W3 and classifier projections; kernel 2 with N2 = hidden_dim = 5632
// columns (22 groups) serves the W2 down-projection. The host processor
// places quantized x, weights and scales in DDR, starts one kernel with the
// addresses and the row count m, and reads out[] when done pulses. The two
// kernels and their column sizes follow the paper. Each kernel having its
// own three 128-bit read ports and one 32-bit write port, and the kernels
// being independent of one another, are this design's choices.
//
// Ports per kernel k (k1_*, k2_*): start/args/busy/done control; read ports
// indexed PORT_X, PORT_WQ, PORT_WS with request (rd_req, rd_req_ready) and
// response (rd_resp, rd_resp_ready) handshakes; a write port wr_*.
module llamaf_top
  import llamaf_pkg::*;
#(
  parameter int unsigned N1 = 2048,
  parameter int unsigned N2 = 5632
) (
  input  logic              clk,
  input  logic              rst_n,
  // kernel 1 (n = dim)
  input  logic              k1_start,
  input  gqmv_args_t        k1_args,
  output logic              k1_busy,
  output logic              k1_done,
  output rd_req_t           k1_rd_req       [NPORTS],
  input  logic              k1_rd_req_ready [NPORTS],
  input  rd_resp_t          k1_rd_resp      [NPORTS],
  output logic              k1_rd_resp_ready[NPORTS],
  output logic              k1_wr_valid,
  input  logic              k1_wr_ready,
  output logic [ADDR_W-1:0] k1_wr_addr,
  output fp32_t             k1_wr_data,
  // kernel 2 (n = hidden_dim)
  input  logic              k2_start,
  input  gqmv_args_t        k2_args,
  output logic              k2_busy,
  output logic              k2_done,
  output rd_req_t           k2_rd_req       [NPORTS],
  input  logic              k2_rd_req_ready [NPORTS],
  input  rd_resp_t          k2_rd_resp      [NPORTS],
  output logic              k2_rd_resp_ready[NPORTS],
  output logic              k2_wr_valid,
  input  logic              k2_wr_ready,
  output logic [ADDR_W-1:0] k2_wr_addr,
  output fp32_t             k2_wr_data
);
  gqmv_port #(.N(N1)) u_kernel1 (
    .clk, .rst_n,
    .start(k1_start), .args(k1_args), .busy(k1_busy), .done(k1_done),
    .rd_req(k1_rd_req), .rd_req_ready(k1_rd_req_ready),
    .rd_resp(k1_rd_resp), .rd_resp_ready(k1_rd_resp_ready),
    .wr_valid(k1_wr_valid), .wr_ready(k1_wr_ready), .wr_addr(k1_wr_addr), .wr_data(k1_wr_data)
  );

  gqmv_port #(.N(N2)) u_kernel2 (
    .clk, .rst_n,
    .start(k2_start), .args(k2_args), .busy(k2_busy), .done(k2_done),
    .rd_req(k2_rd_req), .rd_req_ready(k2_rd_req_ready),
    .rd_resp(k2_rd_resp), .rd_resp_ready(k2_rd_resp_ready),
    .wr_valid(k2_wr_valid), .wr_ready(k2_wr_ready), .wr_addr(k2_wr_addr), .wr_data(k2_wr_data)
  );
endmodule
