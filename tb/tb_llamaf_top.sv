// tb_llamaf_top: the whole accelerator end to end, at its default sizes
// (kernel 1 with 2048 columns, kernel 2 with 5632 columns, GS = 256).
// Each kernel has a DDR model of its own. The test performs, in order:
//   1. kernel 1 alone, m = 6, memory without stalls: results bit for bit
//      and the 16-weights-per-cycle rate;
//   2. kernel 1 (m = 5) and kernel 2 (m = 4) at the same time, with stalling
//      memories and write ports; while kernel 1 runs, the next weights are
//      copied into a second buffer, as the host does to hide weight loading;
//   3. kernel 1 again on that second buffer, with its write port blocked for
//      a while so the streams fill and backpressure reaches the memory.
// It counts each mechanism and fails if one never happened: both kernels,
// concurrent kernels, x pre-fetch followed by dataflow, overlap of reading
// and writing within a kernel, w_stream and group_sum_stream full, memory
// and write stalls, a weight copy during a run.
module tb_llamaf_top;
  import llamaf_pkg::*;
  import tb_fp_pkg::*;
  localparam int N1 = 2048, N2 = 5632, LAT = 8;
  localparam int MEM = 1 << 17;
  logic clk = 0, rst_n = 0;
  logic k1_start, k1_busy, k1_done, k2_start, k2_busy, k2_done;
  gqmv_args_t k1_args, k2_args;
  rd_req_t  k1_rd_req [NPORTS], k2_rd_req [NPORTS];
  logic     k1_rd_req_ready [NPORTS], k2_rd_req_ready [NPORTS];
  rd_resp_t k1_rd_resp [NPORTS], k2_rd_resp [NPORTS];
  logic     k1_rd_resp_ready [NPORTS], k2_rd_resp_ready [NPORTS];
  logic k1_wr_valid, k1_wr_ready, k2_wr_valid, k2_wr_ready;
  logic [ADDR_W-1:0] k1_wr_addr, k2_wr_addr;
  fp32_t k1_wr_data, k2_wr_data;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_k1_ops = 0, n_k2_ops = 0, n_concurrent = 0, n_prefetch = 0, n_overlap = 0;
  int n_w_full = 0, n_gs_full = 0, n_rd_stall = 0, n_wr_stall = 0, n_copy_during_run = 0;

  always #5 clk = ~clk;

  llamaf_top dut (.*);

  ddr_model #(.MEM_BYTES(MEM), .LATENCY(LAT)) u_ddr1 (
    .clk, .rst_n, .rd_req(k1_rd_req), .rd_req_ready(k1_rd_req_ready), .rd_resp(k1_rd_resp),
    .rd_resp_ready(k1_rd_resp_ready), .wr_valid(k1_wr_valid), .wr_ready(k1_wr_ready),
    .wr_addr(k1_wr_addr), .wr_data(k1_wr_data));
  ddr_model #(.MEM_BYTES(MEM), .LATENCY(LAT)) u_ddr2 (
    .clk, .rst_n, .rd_req(k2_rd_req), .rd_req_ready(k2_rd_req_ready), .rd_resp(k2_rd_resp),
    .rd_resp_ready(k2_rd_resp_ready), .wr_valid(k2_wr_valid), .wr_ready(k2_wr_ready),
    .wr_addr(k2_wr_addr), .wr_data(k2_wr_data));

  always @(posedge clk) if (rst_n) begin
    if (k1_done) n_k1_ops++;
    if (k2_done) n_k2_ops++;
    if (k1_busy && k2_busy) n_concurrent++;
    if (dut.u_kernel1.u_kernel.pf_done || dut.u_kernel2.u_kernel.pf_done) n_prefetch++;
    if ((k1_rd_resp[PORT_WQ].valid && k1_rd_resp_ready[PORT_WQ] && k1_wr_valid) ||
        (k2_rd_resp[PORT_WQ].valid && k2_rd_resp_ready[PORT_WQ] && k2_wr_valid)) n_overlap++;
    if ((dut.u_kernel1.u_kernel.w_in_valid && !dut.u_kernel1.u_kernel.w_in_ready) ||
        (dut.u_kernel2.u_kernel.w_in_valid && !dut.u_kernel2.u_kernel.w_in_ready)) n_w_full++;
    if ((dut.u_kernel1.u_kernel.gs_in_valid && !dut.u_kernel1.u_kernel.gs_in_ready) ||
        (dut.u_kernel2.u_kernel.gs_in_valid && !dut.u_kernel2.u_kernel.gs_in_ready)) n_gs_full++;
    if ((k1_wr_valid && !k1_wr_ready) || (k2_wr_valid && !k2_wr_ready)) n_wr_stall++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DDR layout of one problem, all regions 16-byte aligned
  function automatic gqmv_args_t layout(int n, int m, int base);
    gqmv_args_t a;
    int g = n / GS;
    a.xq_addr  = 32'(base);
    a.xs_addr  = 32'(base + n);
    a.wq_addr  = 32'(base + n + 16 * ((4 * g + 15) / 16));
    a.ws_addr  = a.wq_addr + 32'(m * n);
    a.out_addr = a.ws_addr + 32'(16 * ((4 * m * g + 15) / 16));
    a.m        = 32'(m);
    return a;
  endfunction

  // byte access to the memory of kernel k
  function automatic logic [7:0] rd8(int k, longint a);
    return (k == 1) ? u_ddr1.mem[a] : u_ddr2.mem[a];
  endfunction

  task automatic wr8(int k, longint a, logic [7:0] v);
    if (k == 1) u_ddr1.mem[a] = v;
    else        u_ddr2.mem[a] = v;
  endtask

  task automatic put32(int mem, longint a, fp32_t f);
    for (int b = 0; b < 4; b++) wr8(mem, a + b, f[8*b +: 8]);
  endtask

  function automatic fp32_t get32(int mem, longint a);
    return {rd8(mem, a+3), rd8(mem, a+2), rd8(mem, a+1), rd8(mem, a)};
  endfunction

  // random x, weights and scales for a problem; weights only if wonly
  task automatic fill(int mem, gqmv_args_t a, int n, bit wonly);
    int g = n / GS;
    if (!wonly) begin
      for (int i = 0; i < n; i++) wr8(mem, a.xq_addr + i, 8'($urandom));
      for (int j = 0; j < g; j++) put32(mem, a.xs_addr + 4 * j, {1'b0, rand_f32(116, 124)});
    end
    for (int i = 0; i < int'(a.m) * n; i++) wr8(mem, a.wq_addr + i, 8'($urandom));
    for (int j = 0; j < int'(a.m) * g; j++) put32(mem, a.ws_addr + 4 * j, {1'b0, rand_f32(116, 124)});
  endtask

  task automatic check(int mem, gqmv_args_t a, int n, string tag);
    int g = n / GS;
    for (int i = 0; i < int'(a.m); i++) begin
      fp32_t sum = '0;
      for (int j = 0; j < g; j++) begin
        int gs = 0;
        for (int k = 0; k < GS; k++)
          gs += int'(int8_to_16(rd8(mem, a.wq_addr + i * n + j * GS + k))) *
                int'(int8_to_16(rd8(mem, a.xq_addr + j * GS + k)));
        sum = f32_add(sum, f32_mul(f32_mul(get32(mem, a.ws_addr + 4 * (i * g + j)),
                                           get32(mem, a.xs_addr + 4 * j)),
                                   real_to_f32(real'(gs))));
      end
      checks++;
      if (get32(mem, a.out_addr + 4 * i) !== sum) begin
        failures++;
        if (failures < 10) $display("FAIL %s out[%0d] = %h exp %h", tag, i, get32(mem, a.out_addr + 4 * i), sum);
      end
    end
  endtask

  task automatic need(int count, string what);
    checks++;
    $display("  %-40s %0d", what, count);
    if (count == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    gqmv_args_t a1, a2, a1b;
    longint t0, t1;
    k1_start = 0; k2_start = 0; k1_args = '0; k2_args = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. kernel 1 alone, no stalls: results and rate
    a1 = layout(N1, 6, 0);
    fill(1, a1, N1, 0);
    @(negedge clk) begin k1_args = a1; k1_start = 1; end
    t0 = longint'(u_ddr1.cycle);
    @(negedge clk) k1_start = 0;
    while (!k1_done) @(negedge clk);
    t1 = longint'(u_ddr1.cycle);
    check(1, a1, N1, "k1 run1");
    $display("kernel 1, m=6, n=%0d: %0d cycles, of which %0d carry weights", N1, t1 - t0, 6 * N1 / 16);
    checks++;
    if (t1 - t0 > 6 * N1 / 16 + N1 / 16 + 2 + 3 * LAT + 10 + 3 * (N1 / GS) + 16) begin
      failures++; $display("FAIL rate: %0d cycles", t1 - t0);
    end

    // 2. both kernels at once, stalling memories; host copies the next weights meanwhile
    u_ddr1.stall_pct = 25;
    u_ddr2.stall_pct = 25;
    a1  = layout(N1, 5, 0);
    a1b = layout(N1, 5, 65536);
    a2  = layout(N2, 4, 0);
    fill(1, a1, N1, 0);
    fill(2, a2, N2, 0);
    @(negedge clk) begin k1_args = a1; k1_start = 1; k2_args = a2; k2_start = 1; end
    @(negedge clk) begin k1_start = 0; k2_start = 0; end
    repeat (100) @(negedge clk);
    // next weights go to the second buffer while kernel 1 reads the first
    a1b.xq_addr = a1.xq_addr;
    a1b.xs_addr = a1.xs_addr;
    fill(1, a1b, N1, 1);
    if (k1_busy) n_copy_during_run++;
    fork
      while (!k1_done) @(negedge clk);
      while (!k2_done) @(negedge clk);
    join
    repeat (2) @(negedge clk);
    check(1, a1, N1, "k1 run2");
    check(2, a2, N2, "k2 run2");

    // 3. kernel 1 on the second buffer, write port blocked for a while
    @(negedge clk) begin k1_args = a1b; k1_start = 1; end
    @(negedge clk) k1_start = 0;
    repeat (300) @(negedge clk);
    u_ddr1.wr_block = 1;
    repeat (600) @(negedge clk);
    u_ddr1.wr_block = 0;
    while (!k1_done) @(negedge clk);
    repeat (2) @(negedge clk);
    check(1, a1b, N1, "k1 run3");

    n_rd_stall = int'(u_ddr1.rd_stalls + u_ddr2.rd_stalls);
    $display("mechanisms:");
    need(n_k1_ops, "kernel 1 operations (n = 2048)");
    need(n_k2_ops, "kernel 2 operations (n = 5632)");
    need(n_concurrent, "cycles with both kernels busy");
    need(n_prefetch, "x pre-fetches completed");
    need(n_overlap, "cycles reading weights while writing out");
    need(n_w_full, "cycles w_stream full");
    need(n_gs_full, "cycles group_sum_stream full");
    need(n_rd_stall, "memory read stall cycles");
    need(n_wr_stall, "write stall cycles");
    need(n_copy_during_run, "weight copies during a kernel run");
    checks++;
    if (n_k1_ops != 3 || n_k2_ops != 1) begin failures++; $display("FAIL op counts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
