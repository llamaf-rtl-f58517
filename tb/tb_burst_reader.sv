// tb_burst_reader: burst_reader reading ranges from the DDR model with a
// randomly stalling consumer and memory. Checks every beat against memory,
// that no burst exceeds MAX_BURST beats or crosses the range, the number of
// bursts, and the done pulse.
module tb_burst_reader;
  import llamaf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, beat_valid, beat_ready;
  logic [BEAT_W-1:0] beat_data;
  logic [ADDR_W-1:0] base;
  logic [31:0] nbeats;
  rd_req_t  req  [NPORTS];
  logic     req_ready [NPORTS];
  rd_resp_t resp [NPORTS];
  logic     resp_ready [NPORTS];
  logic wr_ready;
  int checks = 0, failures = 0, got = 0, bursts = 0, done_seen = 0;

  always #5 clk = ~clk;

  mem_rd_if mif (.clk, .rst_n);
  burst_reader #(.MAX_BURST(16)) dut (.clk, .rst_n, .start, .base_addr(base), .num_beats(nbeats),
                                      .busy, .done, .mem(mif), .beat_valid, .beat_ready, .beat_data);
  ddr_model #(.MEM_BYTES(1 << 14), .LATENCY(5), .STALL_PCT(20)) u_ddr (
    .clk, .rst_n, .rd_req(req), .rd_req_ready(req_ready), .rd_resp(resp), .rd_resp_ready(resp_ready),
    .wr_valid(1'b0), .wr_ready, .wr_addr('0), .wr_data('0));

  assign req[0]      = '{valid: mif.ar_valid, addr: mif.ar_addr, len: mif.ar_len};
  assign req[1]      = '0;
  assign req[2]      = '0;
  assign mif.ar_ready = req_ready[0];
  assign mif.r_valid  = resp[0].valid;
  assign mif.r_data   = resp[0].data;
  assign mif.r_last   = resp[0].last;
  assign resp_ready[0] = mif.r_ready;
  assign resp_ready[1] = 1'b0;
  assign resp_ready[2] = 1'b0;

  always @(posedge clk) if (rst_n) begin
    if (mif.ar_valid && mif.ar_ready) begin
      bursts++;
      checks++;
      if (mif.ar_len > 15 || mif.ar_addr + (mif.ar_len + 1) * 16 > base + nbeats * 16) begin
        failures++; $display("FAIL burst addr %h len %0d", mif.ar_addr, mif.ar_len);
      end
    end
    if (beat_valid && beat_ready) begin
      logic [BEAT_W-1:0] e;
      for (int i = 0; i < 16; i++) e[8*i +: 8] = u_ddr.mem[base + got * 16 + i];
      checks++;
      if (beat_data !== e) begin failures++; $display("FAIL beat %0d", got); end
      got++;
    end
    if (done) done_seen++;
  end

  always @(negedge clk) beat_ready = ($urandom % 100) < 70;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < (1 << 14); i++) u_ddr.mem[i] = 8'($urandom);
    start = 0; base = '0; nbeats = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (nbeats_list[t]) begin
      @(negedge clk);
      base = 32'(16 * ($urandom % 200)); nbeats = nbeats_list[t];
      got = 0; bursts = 0; done_seen = 0;
      start = 1;
      @(negedge clk) start = 0;
      wait (done_seen == 1);
      @(negedge clk);
      checks++;
      if (got != nbeats || bursts != (nbeats + 15) / 16 || busy) begin
        failures++; $display("FAIL run %0d: got %0d beats, %0d bursts", t, got, bursts);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int nbeats_list [4] = '{1, 16, 37, 100};
endmodule
