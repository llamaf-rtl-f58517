// tb_dot_product: dot_product at N = 1024 (4 groups per row) with a model of
// the xq buffer (one cycle read latency). Random INT8 weights and activations,
// including the extremes -128 and 127, are streamed with gaps; the output is
// stalled at random. Checks every group sum against an integer reference,
// that groups are matched with the right cached x group, the pipeline
// latency (2 + log2(GS) = 10 cycles) and one group per cycle when unstalled.
module tb_dot_product;
  import llamaf_pkg::*;
  localparam int N = 1024, G = N / GS, NV = 64;
  logic clk = 0, rst_n = 0;
  logic clear, w_valid, w_ready, xq_rd_en, gs_valid, gs_ready;
  logic [16*GS-1:0] w_data;
  logic [$clog2(G)-1:0] xq_rd_group;
  int16_t xq_rd_data [GS];
  int32_t gs_data;
  int16_t xq [G][GS];
  logic [16*GS-1:0] wv [NV];
  int32_t expect_q [$];
  int checks = 0, failures = 0, sent = 0, recv = 0, stall_pct = 0, gap_pct = 0;
  int unsigned t_in [$];
  int unsigned cyc = 0, first_out = 0, last_out = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  dot_product #(.N(N)) dut (.*);

  always @(posedge clk) if (xq_rd_en) xq_rd_data <= xq[xq_rd_group];

  function automatic int16_t r8(int i);
    if (i % 17 == 0) return -16'sd128;
    if (i % 19 == 0) return 16'sd127;
    return int8_to_16(8'($urandom));
  endfunction

  // inputs change at the falling edge; the transfers that the next rising
  // edge will make are known a moment later and recorded then
  logic w_pending = 0;
  always @(negedge clk) if (rst_n) begin
    gs_ready = ($urandom % 100) >= stall_pct;
    if (!w_pending) begin
      w_valid = !clear && (sent < NV) && (($urandom % 100) >= gap_pct);
      if (w_valid) w_data = wv[sent];
    end
    #1;
    w_pending = w_valid && !w_ready;
    if (w_valid && w_ready) begin
      int32_t s;
      s = 0;
      for (int k = 0; k < GS; k++)
        s += int16_to_32(wv[sent][16*k +: 16]) * int16_to_32(xq[sent % G][k]);
      expect_q.push_back(s);
      t_in.push_back(cyc);
      sent++;
    end
    if (gs_valid && gs_ready) begin
      checks++;
      if (gs_data !== expect_q[0]) begin
        failures++;
        if (failures < 10) $display("FAIL group %0d: %0d exp %0d", recv, gs_data, expect_q[0]);
      end
      if (stall_pct == 0 && gap_pct == 0) begin
        checks++;
        if (cyc - t_in[0] != 10) begin failures++; $display("FAIL latency %0d", cyc - t_in[0]); end
      end
      if (recv == 0) first_out = cyc;
      last_out = cyc;
      void'(expect_q.pop_front());
      void'(t_in.pop_front());
      recv++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int sp, int gp);
    for (int g = 0; g < G; g++) for (int k = 0; k < GS; k++) xq[g][k] = r8(g * GS + k + 3);
    for (int v = 0; v < NV; v++) for (int k = 0; k < GS; k++) wv[v][16*k +: 16] = r8(v * GS + k);
    stall_pct = sp; gap_pct = gp; sent = 0; recv = 0;
    clear = 1;
    @(negedge clk) #2 clear = 0;
    while (recv < NV) @(negedge clk);
  endtask

  initial begin
    clear = 0; w_valid = 0; w_data = '0; gs_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 0);
    checks++;
    if (last_out - first_out != NV - 1) begin failures++; $display("FAIL rate %0d", last_out - first_out); end
    run(50, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
