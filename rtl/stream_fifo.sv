// stream_fifo: synchronous FIFO for one stream between dataflow stages.
//
// The accelerator's stages (read_cast, read_scale, dot_product, accumulate)
// run concurrently and hand data to one another through streams: w_stream,
// ws_stream and group_sum_stream. This FIFO is one such stream. Both sides use
// a valid/ready handshake; a word moves when valid and ready are high at the
// same rising edge. A word written at edge t can be read from edge t+1 on.
// The stream names and their role follow the paper; the depths and the
// handshake are this design's choice.
//
// Parameters: WIDTH bits per word, DEPTH words (at least 2).
module stream_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;
  logic             push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // a producer must hold its word until it is taken
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (in_valid && !in_ready) |=> in_valid;
  endproperty
  a_hold: assert property (p_hold);

endmodule
