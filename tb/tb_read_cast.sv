// tb_read_cast: read_cast at N = 512 for m = 5 rows. Checks every INT16 lane
// of every group vector against the INT8 weights in memory, the number of
// vectors, the done pulse, one beat per cycle while the stream is ready
// (16 cycles per vector), and correct data under a stalling memory and a
// stalling consumer.
module tb_read_cast;
  import llamaf_pkg::*;
  localparam int N = 512, M = 5, G = N / GS;
  logic clk = 0, rst_n = 0;
  logic start, done, w_valid, w_ready;
  logic [16*GS-1:0] w_data;
  rd_req_t  req  [NPORTS];
  logic     req_ready [NPORTS];
  rd_resp_t resp [NPORTS];
  logic     resp_ready [NPORTS];
  logic wr_ready;
  int checks = 0, failures = 0, nvec = 0, stall_pct = 0, ndone = 0;
  int unsigned first_t, last_t;
  localparam logic [31:0] WQ = 32'h40;

  always #5 clk = ~clk;

  mem_rd_if mif (.clk, .rst_n);
  read_cast #(.N(N)) dut (.clk, .rst_n, .start, .wq_addr(WQ), .m(M), .done, .mem(mif), .w_valid, .w_ready, .w_data);
  rd_bridge u_br (.mem(mif), .req(req[0]), .req_ready(req_ready[0]), .resp(resp[0]), .resp_ready(resp_ready[0]));
  assign req[1] = '0;
  assign req[2] = '0;
  ddr_model #(.MEM_BYTES(1 << 13), .LATENCY(4), .STALL_PCT(0)) u_ddr (
    .clk, .rst_n, .rd_req(req), .rd_req_ready(req_ready), .rd_resp(resp), .rd_resp_ready(resp_ready),
    .wr_valid(1'b0), .wr_ready, .wr_addr('0), .wr_data('0));

  always @(negedge clk) w_ready = ($urandom % 100) >= stall_pct;

  always @(posedge clk) if (rst_n && done) ndone++;

  always @(posedge clk) if (rst_n && w_valid && w_ready) begin
    for (int k = 0; k < GS; k++) begin
      checks++;
      if (w_data[16*k +: 16] !== int8_to_16(u_ddr.mem[WQ + nvec * GS + k])) begin
        failures++;
        if (failures < 10) $display("FAIL vec %0d lane %0d", nvec, k);
      end
    end
    if (nvec == 0) first_t = 32'(u_ddr.cycle);
    last_t = 32'(u_ddr.cycle);
    nvec++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int sp);
    for (int i = 0; i < (1 << 13); i++) u_ddr.mem[i] = 8'($urandom);
    stall_pct = sp; nvec = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (nvec < M * G) @(negedge clk);
    repeat (40) @(negedge clk);
    checks++;
    if (nvec != M * G || ndone != 1) begin failures++; $display("FAIL %0d vectors, %0d done", nvec, ndone); end
    ndone = 0;
  endtask

  initial begin
    start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0);
    checks++;   // 16 beats per vector: vectors 16 cycles apart
    if (last_t - first_t != 16 * (M * G - 1)) begin
      failures++; $display("FAIL rate: %0d cycles for %0d vectors", last_t - first_t, M * G);
    end
    run(40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
