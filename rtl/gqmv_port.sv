// gqmv_port: gqmv_kernel with its three read interfaces flattened to
// request/response structs, so the kernel can sit behind plain top-level
// ports. Port 0 reads x, port 1 the weights, port 2 the weight scales.
// Nothing but wiring; the kernel does the work.
module gqmv_port
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
  output rd_req_t           rd_req      [NPORTS],
  input  logic              rd_req_ready[NPORTS],
  input  rd_resp_t          rd_resp     [NPORTS],
  output logic              rd_resp_ready[NPORTS],
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output fp32_t             wr_data
);
  mem_rd_if #(.ADDR_W(ADDR_W), .DATA_W(BEAT_W), .LEN_W(LEN_W)) rd [NPORTS] (.clk, .rst_n);

  for (genvar p = 0; p < int'(NPORTS); p++) begin : g_port
    assign rd_req[p].valid   = rd[p].ar_valid;
    assign rd_req[p].addr    = rd[p].ar_addr;
    assign rd_req[p].len     = rd[p].ar_len;
    assign rd[p].ar_ready    = rd_req_ready[p];
    assign rd[p].r_valid     = rd_resp[p].valid;
    assign rd[p].r_data      = rd_resp[p].data;
    assign rd[p].r_last      = rd_resp[p].last;
    assign rd_resp_ready[p]  = rd[p].r_ready;
  end

  gqmv_kernel #(.N(N)) u_kernel (
    .clk, .rst_n, .start, .args, .busy, .done,
    .x_mem(rd[PORT_X]), .wq_mem(rd[PORT_WQ]), .ws_mem(rd[PORT_WS]),
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );
endmodule
