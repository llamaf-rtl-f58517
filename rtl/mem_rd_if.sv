// mem_rd_if: read channel from the accelerator to off-chip DDR.
//
// A simplified form of the 128-bit AXI read channel the accelerator uses to
// fetch x, the weights and the scales. A request (ar_*) names a byte address
// and a burst of ar_len+1 beats; the memory answers with that many beats of
// DATA_W bits on r_*, the last one flagged by r_last, in request order. Both
// channels move a word when valid and ready are high at one rising edge.
// The 128-bit width follows the paper; the reduced signal set (no IDs, sizes
// or response codes) is this design's choice.
interface mem_rd_if #(
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DATA_W = 128,
  parameter int unsigned LEN_W  = 8
) (
  input logic clk,
  input logic rst_n
);
  logic              ar_valid;
  logic              ar_ready;
  logic [ADDR_W-1:0] ar_addr;
  logic [LEN_W-1:0]  ar_len;
  logic              r_valid;
  logic              r_ready;
  logic [DATA_W-1:0] r_data;
  logic              r_last;

  modport master (output ar_valid, ar_addr, ar_len, r_ready,
                  input  ar_ready, r_valid, r_data, r_last);
  modport slave  (input  ar_valid, ar_addr, ar_len, r_ready,
                  output ar_ready, r_valid, r_data, r_last);

  // a request or a beat, once offered, stays until it is taken
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              (ar_valid && !ar_ready) |=> (ar_valid && $stable(ar_addr) && $stable(ar_len)));
  a_r_hold:  assert property (@(posedge clk) disable iff (!rst_n)
                              (r_valid && !r_ready) |=> (r_valid && $stable(r_data)));
endinterface
