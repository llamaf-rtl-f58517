// burst_reader: reads a contiguous range of memory as a stream of beats.
//
// Every DDR read of the accelerator (the vector x, its scales, the weight
// matrix and the weight scales) is one contiguous range. On start the reader
// takes a beat-aligned byte address and a count of 128-bit beats, and issues
// bursts of up to MAX_BURST beats back to back on the request channel,
// without waiting for their data: the memory may keep several requests
// outstanding, so its latency is hidden behind the stream. The returned beats
// pass straight through to beat_*, and the consumer's ready is the read
// channel's ready, so a slow consumer stalls the memory, never loses data.
// The paper names the reads; burst size and outstanding requests are choices
// of this design.
//
// Timing: the first request goes out the cycle after start; done pulses the
// cycle after the last beat is taken.
module burst_reader
  import llamaf_pkg::*;
#(
  parameter int unsigned MAX_BURST = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base_addr,    // BEAT_BYTES aligned
  input  logic [31:0]       num_beats,    // beats to read, > 0
  output logic              busy,
  output logic              done,
  mem_rd_if.master          mem,
  output logic              beat_valid,
  input  logic              beat_ready,
  output logic [BEAT_W-1:0] beat_data
);
  logic [ADDR_W-1:0] next_addr;
  logic [31:0]       req_left, rx_left;
  logic [31:0]       this_len;

  assign this_len     = (req_left > MAX_BURST) ? MAX_BURST : req_left;
  assign mem.ar_valid = busy && (req_left != '0);
  assign mem.ar_addr  = next_addr;
  assign mem.ar_len   = LEN_W'(this_len - 1);
  assign beat_valid   = busy && mem.r_valid;
  assign beat_data    = mem.r_data;
  assign mem.r_ready  = busy && beat_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      next_addr <= '0;
      req_left  <= '0;
      rx_left   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= 1'b1;
        next_addr <= base_addr;
        req_left  <= num_beats;
        rx_left   <= num_beats;
      end else if (busy) begin
        if (mem.ar_valid && mem.ar_ready) begin
          next_addr <= next_addr + ADDR_W'(this_len * BEAT_BYTES);
          req_left  <= req_left - this_len;
        end
        if (mem.r_valid && mem.r_ready) begin
          rx_left <= rx_left - 1;
          if (rx_left == 32'd1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end
endmodule
