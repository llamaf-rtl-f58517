// tb_gqmv_kernel: one GQMV kernel at N = 512 (2 groups per row) end to end
// against the DDR model. Random INT8 x and weights, positive FP32 scales.
// Run 1: memory without stalls; checks every out[i] bit for bit against the
// reference that forms (ws*xs)*float(group_sum) and sums the groups in
// order, and that the matrix streams at 16 weights per cycle
// (m*N/16 cycles plus a fixed pre-fetch and drain overhead).
// Run 2: a stalling memory and write port, the write port blocked for 400
// cycles so that every stream fills, a larger m; checks the results.
// Also counts backpressure on w_stream and group_sum_stream.
module tb_gqmv_kernel;
  import llamaf_pkg::*;
  import tb_fp_pkg::*;
  localparam int N = 512, G = N / GS, LAT = 6;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, wr_valid, wr_ready;
  gqmv_args_t args;
  logic [ADDR_W-1:0] wr_addr;
  fp32_t wr_data;
  rd_req_t  req  [NPORTS];
  logic     req_ready [NPORTS];
  rd_resp_t resp [NPORTS];
  logic     resp_ready [NPORTS];
  int checks = 0, failures = 0, ndone = 0, w_bp = 0, gs_bp = 0;

  always #5 clk = ~clk;

  mem_rd_if xm (.clk, .rst_n);
  mem_rd_if wm (.clk, .rst_n);
  mem_rd_if sm (.clk, .rst_n);
  gqmv_kernel #(.N(N)) dut (.clk, .rst_n, .start, .args, .busy, .done,
    .x_mem(xm), .wq_mem(wm), .ws_mem(sm), .wr_valid, .wr_ready, .wr_addr, .wr_data);
  rd_bridge u_b0 (.mem(xm), .req(req[0]), .req_ready(req_ready[0]), .resp(resp[0]), .resp_ready(resp_ready[0]));
  rd_bridge u_b1 (.mem(wm), .req(req[1]), .req_ready(req_ready[1]), .resp(resp[1]), .resp_ready(resp_ready[1]));
  rd_bridge u_b2 (.mem(sm), .req(req[2]), .req_ready(req_ready[2]), .resp(resp[2]), .resp_ready(resp_ready[2]));
  ddr_model #(.MEM_BYTES(1 << 16), .LATENCY(LAT), .STALL_PCT(0)) u_ddr (
    .clk, .rst_n, .rd_req(req), .rd_req_ready(req_ready), .rd_resp(resp), .rd_resp_ready(resp_ready),
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  always @(posedge clk) begin
    if (rst_n && done) ndone++;
    if (dut.w_in_valid && !dut.w_in_ready) w_bp++;
    if (dut.gs_in_valid && !dut.gs_in_ready) gs_bp++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp32_t rd32(longint a);
    return {u_ddr.mem[a+3], u_ddr.mem[a+2], u_ddr.mem[a+1], u_ddr.mem[a]};
  endfunction

  task automatic fill(int m);
    for (int i = 0; i < N + m * N; i++) u_ddr.mem[i] = 8'($urandom);
    for (int g = 0; g < G; g++) begin
      fp32_t f = {1'b0, rand_f32(116, 124)};
      for (int b = 0; b < 4; b++) u_ddr.mem[args.xs_addr + 4 * g + b] = f[8*b +: 8];
    end
    for (int j = 0; j < m * G; j++) begin
      fp32_t f = {1'b0, rand_f32(116, 124)};
      for (int b = 0; b < 4; b++) u_ddr.mem[args.ws_addr + 4 * j + b] = f[8*b +: 8];
    end
  endtask

  task automatic check_out(int m);
    for (int i = 0; i < m; i++) begin
      fp32_t sum;
      sum = '0;
      for (int g = 0; g < G; g++) begin
        int gs;
        gs = 0;
        for (int k = 0; k < GS; k++)
          gs += int'(int8_to_16(u_ddr.mem[args.wq_addr + i * N + g * GS + k])) *
                int'(int8_to_16(u_ddr.mem[args.xq_addr + g * GS + k]));
        sum = f32_add(sum, f32_mul(f32_mul(rd32(args.ws_addr + 4 * (i * G + g)), rd32(args.xs_addr + 4 * g)),
                                   real_to_f32(real'(gs))));
      end
      checks++;
      if (rd32(args.out_addr + 4 * i) !== sum) begin
        failures++;
        if (failures < 10) $display("FAIL out[%0d] = %h exp %h", i, rd32(args.out_addr + 4 * i), sum);
      end
    end
  endtask

  task automatic run(int m, output int cycles);
    longint t0;
    args.xq_addr  = 0;
    args.wq_addr  = N;
    args.xs_addr  = 32'(N + m * N);
    args.ws_addr  = 32'(N + m * N + 256);
    args.out_addr = 32'(N + m * N + 256 + ((m * G * 4 + 15) / 16) * 16);
    args.m        = 32'(m);
    fill(m);
    ndone = 0;
    @(negedge clk) start = 1;
    t0 = longint'(u_ddr.cycle);
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    cycles = int'(longint'(u_ddr.cycle) - t0);
    repeat (3) @(negedge clk);
    checks++;
    if (ndone != 1 || busy) begin failures++; $display("FAIL done %0d busy %0b", ndone, busy); end
    check_out(m);
  endtask

  initial begin
    int cyc;
    start = 0; args = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(8, cyc);
    // pre-fetch N/16 + G/4 beats and two latencies, matrix m*N/16 beats,
    // drain: dot-product pipeline and 3 cycles per group, plus control
    checks++;
    if (cyc < 8 * N / 16 || cyc > N / 16 + (G + 3) / 4 + 3 * LAT + 8 * N / 16 + 10 + 3 * G + 16) begin
      failures++; $display("FAIL rate: %0d cycles", cyc);
    end
    $display("run 1: m=8 N=%0d took %0d cycles (%0d for the weights alone)", N, cyc, 8 * N / 16);
    u_ddr.stall_pct = 30;
    fork
      run(20, cyc);
      begin   // hold the write port off for a while: the streams fill up behind it
        repeat (150) @(negedge clk);
        u_ddr.wr_block = 1;
        repeat (400) @(negedge clk);
        u_ddr.wr_block = 0;
      end
    join
    checks++;
    if (w_bp == 0) begin failures++; $display("FAIL no w_stream backpressure seen"); end
    $display("w_stream backpressure cycles %0d, group_sum_stream %0d", w_bp, gs_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
