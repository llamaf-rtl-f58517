// tb_x_prefetch: x_prefetch at N = 5632 (22 groups, so the scales end in a
// partly used beat) reading from a stalling DDR model. Checks every cached
// INT16 lane (sign extension included) through the read port, every cached
// scale, the done pulse, and that the read took one beat per cycle when the
// memory does not stall.
module tb_x_prefetch;
  import llamaf_pkg::*;
  localparam int N = 5632, G = N / GS;
  logic clk = 0, rst_n = 0;
  logic start, done, rd_en;
  logic [$clog2(G)-1:0] rd_group;
  int16_t rd_data [GS];
  fp32_t  xs_vector [G];
  rd_req_t  req  [NPORTS];
  logic     req_ready [NPORTS];
  rd_resp_t resp [NPORTS];
  logic     resp_ready [NPORTS];
  logic wr_ready;
  int checks = 0, failures = 0;
  localparam logic [31:0] XQ = 32'h100, XS = 32'h2000;

  always #5 clk = ~clk;

  mem_rd_if mif (.clk, .rst_n);
  x_prefetch #(.N(N)) dut (.clk, .rst_n, .start, .xq_addr(XQ), .xs_addr(XS), .done, .mem(mif),
                           .rd_en, .rd_group, .rd_data, .xs_vector);
  rd_bridge u_br (.mem(mif), .req(req[0]), .req_ready(req_ready[0]), .resp(resp[0]), .resp_ready(resp_ready[0]));
  assign req[1] = '0;
  assign req[2] = '0;
  ddr_model #(.MEM_BYTES(1 << 14), .LATENCY(6), .STALL_PCT(0)) u_ddr (
    .clk, .rst_n, .rd_req(req), .rd_req_ready(req_ready), .rd_resp(resp), .rd_resp_ready(resp_ready),
    .wr_valid(1'b0), .wr_ready, .wr_addr('0), .wr_data('0));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_and_check(int rep);
    int t0, t1;
    for (int i = 0; i < (1 << 14); i++) u_ddr.mem[i] = 8'($urandom);
    @(negedge clk) start = 1;
    t0 = int'(u_ddr.cycle);
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    t1 = int'(u_ddr.cycle);
    // rate: N/16 + ceil(G/4) beats plus two memory latencies and a few cycles of control
    checks++;
    if (t1 - t0 > N / 16 + (G + 3) / 4 + 2 * 6 + 8) begin
      failures++; $display("FAIL prefetch took %0d cycles", t1 - t0);
    end
    for (int g = 0; g < G; g++) begin
      logic [31:0] e;
      @(negedge clk) begin rd_en = 1; rd_group = 5'(g); end
      @(negedge clk) rd_en = 0;
      for (int k = 0; k < GS; k++) begin
        checks++;
        if (rd_data[k] !== int8_to_16(u_ddr.mem[XQ + g * GS + k])) begin
          failures++;
          if (failures < 10) $display("FAIL xq g%0d k%0d: %h", g, k, rd_data[k]);
        end
      end
      for (int b = 0; b < 4; b++) e[8*b +: 8] = u_ddr.mem[XS + 4 * g + b];
      checks++;
      if (xs_vector[g] !== e) begin failures++; $display("FAIL xs %0d", g); end
    end
  endtask

  initial begin
    start = 0; rd_en = 0; rd_group = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_and_check(0);
    run_and_check(1);   // a second vector replaces the first
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
