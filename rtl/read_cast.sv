// read_cast: streams the INT8 weight matrix as INT16 group vectors.
//
// Pre-processing of the weights. On start it reads the m x N INT8 matrix wq,
// stored row-major, as one run of 128-bit beats. Each beat's 16 bytes are
// sign-extended to INT16 and placed in the next 16 lanes of a GS-lane
// vector; after GS/16 = 16 beats the vector is complete and is offered on
// w_stream. The next vector fills in the same register while the finished one
// is being taken, so a new beat is accepted every cycle for as long as the
// stream has room: the stage moves 16 weights per cycle, which sets the rate
// of the whole accelerator. The cast and the grouping follow the paper; the
// memory layout (contiguous, 16-byte aligned) is this design's choice.
//
// Interface: w_* carries one group vector, lane k in bits [16k +: 16].
// done pulses after the last beat has been taken.
module read_cast
  import llamaf_pkg::*;
#(
  parameter int unsigned N = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] wq_addr,
  input  logic [31:0]       m,
  output logic              done,
  mem_rd_if.master          mem,
  output logic              w_valid,
  input  logic              w_ready,
  output logic [16*GS-1:0]  w_data
);
  localparam int unsigned BPG = GS / BEAT_BYTES;   // beats per group vector
  localparam int unsigned RB  = N / BEAT_BYTES;    // beats per matrix row

  logic              beat_valid, beat_ready, rd_busy;
  logic [BEAT_W-1:0] beat_data;
  logic [$clog2(BPG)-1:0] lane_beat;
  logic              full;

  burst_reader u_reader (
    .clk, .rst_n,
    .start, .base_addr(wq_addr), .num_beats(m * RB),
    .busy(rd_busy), .done,
    .mem,
    .beat_valid, .beat_ready, .beat_data
  );

  assign w_valid    = full;
  assign beat_ready = !full || w_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lane_beat <= '0;
      full      <= 1'b0;
    end else begin
      if (w_valid && w_ready) full <= 1'b0;
      if (beat_valid && beat_ready) begin
        lane_beat <= lane_beat + 1'b1;            // wraps after BPG beats
        if (lane_beat == $clog2(BPG)'(BPG - 1)) full <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (beat_valid && beat_ready)
      for (int b = 0; b < int'(BEAT_BYTES); b++)
        w_data[16 * (int'(lane_beat) * BEAT_BYTES + b) +: 16] <=
          int8_to_16(beat_data[8*b +: 8]);
  end

endmodule
