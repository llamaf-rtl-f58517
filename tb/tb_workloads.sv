// tb_workloads: every matrix-vector product of one TinyLlama 1.1B layer, and
// the classifier, at full size on the top at its default sizes. Kernel 1
// (n = dim = 2048) runs the concatenated QKV projection (2560 rows), the
// attention output W_o (2048 rows), the concatenated W_1+W_3 (11264 rows) and
// the classifier (32000 rows) one after another; kernel 2 (n = hidden_dim =
// 5632) runs the FFN down-projection W_2 (2048 rows) alongside. Data are
// random INT8 values with positive FP32 scales; the memory has a fixed
// latency and never stalls. Every output is checked bit for bit, and each
// run's cycle count is compared with the m*n/16 cycles of its weight stream.
module tb_workloads;
  import llamaf_pkg::*;
  import tb_fp_pkg::*;
  localparam int DIM = 2048, HID = 5632, M = 2048, LAT = 20;
  localparam int MEM1 = 1 << 27, MEM2 = 1 << 24;
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
  longint t_start, t_k1, t_k2;

  always #5 clk = ~clk;

  llamaf_top dut (.*);

  ddr_model #(.MEM_BYTES(MEM1), .LATENCY(LAT)) u_ddr1 (
    .clk, .rst_n, .rd_req(k1_rd_req), .rd_req_ready(k1_rd_req_ready), .rd_resp(k1_rd_resp),
    .rd_resp_ready(k1_rd_resp_ready), .wr_valid(k1_wr_valid), .wr_ready(k1_wr_ready),
    .wr_addr(k1_wr_addr), .wr_data(k1_wr_data));
  ddr_model #(.MEM_BYTES(MEM2), .LATENCY(LAT)) u_ddr2 (
    .clk, .rst_n, .rd_req(k2_rd_req), .rd_req_ready(k2_rd_req_ready), .rd_resp(k2_rd_resp),
    .rd_resp_ready(k2_rd_resp_ready), .wr_valid(k2_wr_valid), .wr_ready(k2_wr_ready),
    .wr_addr(k2_wr_addr), .wr_data(k2_wr_data));

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  function automatic gqmv_args_t layout(int n, int m);
    gqmv_args_t a;
    int g = n / GS;
    a.xq_addr  = 0;
    a.xs_addr  = 32'(n);
    a.wq_addr  = 32'(n + 16 * ((4 * g + 15) / 16));
    a.ws_addr  = a.wq_addr + 32'(m * n);
    a.out_addr = a.ws_addr + 32'(16 * ((4 * m * g + 15) / 16));
    a.m        = 32'(m);
    return a;
  endfunction

  task automatic fill(int mem, gqmv_args_t a, int n);
    int g = n / GS;
    for (int i = 0; i < n; i++) wr8(mem, a.xq_addr + i, 8'($urandom));
    for (int j = 0; j < g; j++) put32(mem, a.xs_addr + 4 * j, {1'b0, rand_f32(116, 124)});
    for (int i = 0; i < int'(a.m) * n; i++) wr8(mem, a.wq_addr + i, 8'($urandom));
    for (int j = 0; j < int'(a.m) * g; j++) put32(mem, a.ws_addr + 4 * j, {1'b0, rand_f32(116, 124)});
  endtask

  task automatic check(int mem, gqmv_args_t a, int n, string tag);
    int g = n / GS;
    int bad = 0;
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
        failures++; bad++;
        if (bad < 5) $display("FAIL %s out[%0d] = %h exp %h", tag, i, get32(mem, a.out_addr + 4 * i), sum);
      end
    end
  endtask

  int k1_rows [4] = '{2560, 2048, 11264, 32000};
  string k1_name [4] = '{"W_q+W_k+W_v", "W_o", "W_1+W_3", "W_classifier"};

  initial begin
    gqmv_args_t a2;
    k1_start = 0; k2_start = 0; k1_args = '0; k2_args = '0;
    a2 = layout(HID, M);
    fill(2, a2, HID);
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin   // kernel 2: the FFN down-projection
        longint t0;
        @(negedge clk) begin k2_args = a2; k2_start = 1; end
        t0 = longint'(u_ddr2.cycle);
        @(negedge clk) k2_start = 0;
        while (!k2_done) @(negedge clk);
        t_k2 = longint'(u_ddr2.cycle) - t0;
        $display("%-13s (%0d x %0d) on kernel 2: %0d cycles, weight stream %0d", "W_2", M, HID, t_k2, M * HID / 16);
        checks++;
        if (t_k2 > M * HID / 16 + 1000) begin failures++; $display("FAIL kernel 2 rate"); end
        check(2, a2, HID, "W_2");
      end
      begin   // kernel 1: the four matrices with n = dim, one after another
        for (int w = 0; w < 4; w++) begin
          gqmv_args_t a1;
          longint t0;
          a1 = layout(DIM, k1_rows[w]);
          fill(1, a1, DIM);
          @(negedge clk) begin k1_args = a1; k1_start = 1; end
          t0 = longint'(u_ddr1.cycle);
          @(negedge clk) k1_start = 0;
          while (!k1_done) @(negedge clk);
          t_k1 = longint'(u_ddr1.cycle) - t0;
          $display("%-13s (%0d x %0d) on kernel 1: %0d cycles, weight stream %0d", k1_name[w], k1_rows[w], DIM,
                   t_k1, k1_rows[w] * DIM / 16);
          checks++;
          if (t_k1 > k1_rows[w] * DIM / 16 + 1000) begin failures++; $display("FAIL kernel 1 rate"); end
          check(1, a1, DIM, k1_name[w]);
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
