// tb_read_scale: read_scale at N = 5632 (22 scales per row, rows not aligned
// to beats) for m = 7 rows, with a stalling memory and a stalling consumer.
// Checks every scale of every row vector, the number of rows and the done
// pulse.
module tb_read_scale;
  import llamaf_pkg::*;
  localparam int N = 5632, M = 7, G = N / GS;
  logic clk = 0, rst_n = 0;
  logic start, done, ws_valid, ws_ready;
  logic [32*G-1:0] ws_data;
  rd_req_t  req  [NPORTS];
  logic     req_ready [NPORTS];
  rd_resp_t resp [NPORTS];
  logic     resp_ready [NPORTS];
  logic wr_ready;
  int checks = 0, failures = 0, nrow = 0, ndone = 0;
  localparam logic [31:0] WS = 32'h80;

  always #5 clk = ~clk;

  mem_rd_if mif (.clk, .rst_n);
  read_scale #(.N(N)) dut (.clk, .rst_n, .start, .ws_addr(WS), .m(M), .done, .mem(mif), .ws_valid, .ws_ready, .ws_data);
  rd_bridge u_br (.mem(mif), .req(req[0]), .req_ready(req_ready[0]), .resp(resp[0]), .resp_ready(resp_ready[0]));
  assign req[1] = '0;
  assign req[2] = '0;
  ddr_model #(.MEM_BYTES(1 << 12), .LATENCY(4), .STALL_PCT(30)) u_ddr (
    .clk, .rst_n, .rd_req(req), .rd_req_ready(req_ready), .rd_resp(resp), .rd_resp_ready(resp_ready),
    .wr_valid(1'b0), .wr_ready, .wr_addr('0), .wr_data('0));

  always @(negedge clk) ws_ready = ($urandom % 100) < 30;
  always @(posedge clk) if (rst_n && done) ndone++;

  always @(posedge clk) if (rst_n && ws_valid && ws_ready) begin
    for (int g = 0; g < G; g++) begin
      logic [31:0] e;
      for (int b = 0; b < 4; b++) e[8*b +: 8] = u_ddr.mem[WS + 4 * (nrow * G + g) + b];
      checks++;
      if (ws_data[32*g +: 32] !== e) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d word %0d: %h exp %h", nrow, g, ws_data[32*g +: 32], e);
      end
    end
    nrow++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < (1 << 12); i++) u_ddr.mem[i] = 8'($urandom);
    start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      nrow = 0; ndone = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (nrow < M) @(negedge clk);
      repeat (50) @(negedge clk);
      checks++;
      if (nrow != M || ndone != 1) begin failures++; $display("FAIL %0d rows %0d done", nrow, ndone); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
