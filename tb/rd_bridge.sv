// rd_bridge: testbench wiring from a mem_rd_if to one read port of the DDR
// model (request/response structs). No logic of its own.
module rd_bridge
  import llamaf_pkg::*;
(
  mem_rd_if.slave mem,
  output rd_req_t  req,
  input  logic     req_ready,
  input  rd_resp_t resp,
  output logic     resp_ready
);
  assign req          = '{valid: mem.ar_valid, addr: mem.ar_addr, len: mem.ar_len};
  assign mem.ar_ready = req_ready;
  assign mem.r_valid  = resp.valid;
  assign mem.r_data   = resp.data;
  assign mem.r_last   = resp.last;
  assign resp_ready   = mem.r_ready;
endmodule
