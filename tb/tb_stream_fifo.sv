// tb_stream_fifo: random pushes and pops on a stream_fifo, compared with a
// queue model; also checks that ready drops exactly when DEPTH words are held
// and that a word is readable the cycle after it was written.
module tb_stream_fifo;
  localparam int W = 16, D = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [W-1:0] model [$];
  int checks = 0, failures = 0, full_seen = 0;
  logic pending = 0;   // offered word not yet taken

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      // checks on the current state
      checks++;
      if (in_ready !== (model.size() < D)) begin
        failures++; $display("FAIL ready: size %0d ready %0b", model.size(), in_ready);
      end
      checks++;
      if (out_valid !== (model.size() > 0)) begin
        failures++; $display("FAIL valid: size %0d valid %0b", model.size(), out_valid);
      end
      if (out_valid && model.size() > 0) begin
        checks++;
        if (out_data !== model[0]) begin
          failures++; $display("FAIL data %h expected %h", out_data, model[0]);
        end
      end
      if (model.size() == D) full_seen++;
      if (!pending) begin
        in_valid = ($urandom % 100) < ((c / 1000) % 2 ? 80 : 35);
        in_data  = W'($urandom);
      end
      out_ready = ($urandom % 100) < ((c / 1000) % 2 ? 35 : 80);
      @(posedge clk);
      #1;
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL: never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model update at the clock edge, using the values driven before it
  always @(posedge clk) if (rst_n) begin
    logic pop, push;
    pop  = out_valid && out_ready;
    push = in_valid && in_ready;
    if (pop) void'(model.pop_front());
    if (push) model.push_back(in_data);
    pending = in_valid && !in_ready;
  end
endmodule
