// ddr_model: behavioural model of the off-chip DDR memory (not synthesizable).
//
// A byte array of MEM_BYTES with NPORTS independent read ports and one
// 32-bit write port, in the request/response form of llamaf_pkg. Each read
// port queues up to 8 burst requests; the first beat of a burst is offered
// LATENCY cycles after its request was accepted, then one 16-byte beat per
// cycle. With STALL_PCT > 0 the model randomly withholds beats and write
// acceptance (stall_pct, changeable at run time) to exercise the accelerator's backpressure. wr_block holds off
// all writes. Testbenches load and inspect the contents through mem[] directly. Counters report beats served
// and stall cycles.
module ddr_model
  import llamaf_pkg::*;
#(
  parameter int unsigned MEM_BYTES = 1 << 16,
  parameter int unsigned LATENCY   = 8,
  parameter int unsigned STALL_PCT = 0   // initial value of stall_pct
) (
  input  logic              clk,
  input  logic              rst_n,
  input  rd_req_t           rd_req       [NPORTS],
  output logic              rd_req_ready [NPORTS],
  output rd_resp_t          rd_resp      [NPORTS],
  input  logic              rd_resp_ready[NPORTS],
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [ADDR_W-1:0] wr_addr,
  input  fp32_t             wr_data
);
  typedef struct {
    longint unsigned addr;
    int unsigned     left;
    longint unsigned t_ready;
  } burst_t;

  logic [7:0]      mem [MEM_BYTES];
  burst_t          q [NPORTS][$];
  longint unsigned cycle = 0;
  int unsigned     stall_pct = STALL_PCT;   // may be changed by the testbench
  bit              wr_block  = 0;           // testbench may block all writes
  int unsigned     beats_served = 0;
  int unsigned     rd_stalls = 0;
  int unsigned     wr_stalls = 0;
  int unsigned     words_written = 0;

  for (genvar p = 0; p < int'(NPORTS); p++) begin : g_ready
    assign rd_req_ready[p] = (q[p].size() < 8);
  end

  initial begin
    for (int p = 0; p < int'(NPORTS); p++) rd_resp[p] = '0;
    wr_ready = 1'b0;
  end

  always @(posedge clk) begin
    cycle++;
    if (!rst_n) begin
      for (int p = 0; p < int'(NPORTS); p++) begin
        q[p].delete();
        rd_resp[p] <= '0;
      end
      wr_ready <= 1'b0;
    end else begin
      for (int p = 0; p < int'(NPORTS); p++) begin
        logic   holding;
        burst_t b;
        holding = rd_resp[p].valid && !rd_resp_ready[p];
        if (rd_resp[p].valid && rd_resp_ready[p]) begin
          beats_served++;
          q[p][0].addr += longint'(BEAT_BYTES);
          q[p][0].left -= 1;
          if (q[p][0].left == 0) void'(q[p].pop_front());
        end
        if (rd_req[p].valid && rd_req_ready[p]) begin
          b.addr    = longint'(rd_req[p].addr);
          b.left    = int'(rd_req[p].len) + 1;
          b.t_ready = cycle + longint'(LATENCY);
          q[p].push_back(b);
        end
        if (!holding) begin
          if (q[p].size() > 0 && q[p][0].t_ready <= cycle &&
              ($urandom % 100) >= stall_pct) begin
            rd_resp_t r;
            r.valid = 1'b1;
            r.last  = (q[p][0].left == 1);
            for (int i = 0; i < int'(BEAT_BYTES); i++)
              r.data[8*i +: 8] = mem[int'((q[p][0].addr + longint'(i)) % longint'(MEM_BYTES))];
            rd_resp[p] <= r;
          end else begin
            if (q[p].size() > 0) rd_stalls++;
            rd_resp[p] <= '0;
          end
        end
      end
      if (wr_valid && wr_ready) begin
        for (int i = 0; i < 4; i++) mem[(wr_addr + i) % MEM_BYTES] = wr_data[8*i +: 8];
        words_written++;
      end
      if (wr_valid && !wr_ready) wr_stalls++;
      wr_ready <= !wr_block && (($urandom % 100) >= stall_pct);
    end
  end
endmodule
