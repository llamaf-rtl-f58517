// tb_accumulate: accumulate at N = 5632 (22 groups) for m = 16 rows. Streams
// weight-scale rows and INT32 group sums with random gaps and a randomly
// stalling write port. Checks each written address and FP32 word bit for bit
// against a reference that forms (ws * xs) * float(group_sum) and sums the
// groups in order from +0.0, rounding each step to FP32; also the done pulse.
module tb_accumulate;
  import llamaf_pkg::*;
  import tb_fp_pkg::*;
  localparam int N = 5632, M = 16, G = N / GS;
  localparam logic [31:0] OUT = 32'h1000;
  logic clk = 0, rst_n = 0;
  logic start, done, ws_valid, ws_ready, gs_valid, gs_ready, wr_valid, wr_ready;
  fp32_t xs_vector [G];
  logic [32*G-1:0] ws_data;
  int32_t gs_data;
  logic [ADDR_W-1:0] wr_addr;
  fp32_t wr_data;
  logic [32*G-1:0] ws_rows [M];
  int32_t gsums [M][G];
  fp32_t expected [M];
  int checks = 0, failures = 0, nrow_sent = 0, ngs_sent = 0, nwr = 0, ndone = 0;
  logic ws_pend = 0, gs_pend = 0;

  always #5 clk = ~clk;

  accumulate #(.N(N)) dut (.clk, .rst_n, .start, .out_addr(OUT), .m(M), .done, .xs_vector,
    .ws_valid, .ws_ready, .ws_data, .gs_valid, .gs_ready, .gs_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  always @(negedge clk) if (rst_n) begin
    if (!ws_pend) begin
      ws_valid = (nrow_sent < M) && ($urandom % 100 < 50);
      if (ws_valid) ws_data = ws_rows[nrow_sent];
    end
    if (!gs_pend) begin
      gs_valid = (ngs_sent < M * G) && ($urandom % 100 < 60);
      if (gs_valid) gs_data = gsums[ngs_sent / G][ngs_sent % G];
    end
    wr_ready = ($urandom % 100) < 40;
    #1;
    ws_pend = ws_valid && !ws_ready;
    gs_pend = gs_valid && !gs_ready;
    if (ws_valid && ws_ready) nrow_sent++;
    if (gs_valid && gs_ready) ngs_sent++;
    if (wr_valid && wr_ready) begin
      checks += 2;
      if (wr_addr !== OUT + 4 * nwr) begin failures++; $display("FAIL addr %h", wr_addr); end
      if (wr_data !== expected[nwr]) begin
        failures++; $display("FAIL row %0d: %h exp %h", nwr, wr_data, expected[nwr]);
      end
      nwr++;
    end
    if (done) ndone++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; ws_valid = 0; gs_valid = 0; wr_ready = 0; ws_data = '0; gs_data = '0;
    for (int g = 0; g < G; g++) xs_vector[g] = {1'b0, rand_f32(115, 125)};
    for (int i = 0; i < M; i++) begin
      fp32_t sum;
      sum = '0;
      for (int g = 0; g < G; g++) begin
        ws_rows[i][32*g +: 32] = {1'b0, rand_f32(115, 125)};
        gsums[i][g] = int32_t'(signed'(24'($urandom))) >>> ($urandom % 8);
        sum = f32_add(sum, f32_mul(f32_mul(ws_rows[i][32*g +: 32], xs_vector[g]),
                                   real_to_f32(real'(gsums[i][g]))));
      end
      expected[i] = sum;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (nwr < M) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (ndone != 1) begin failures++; $display("FAIL done pulses %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
