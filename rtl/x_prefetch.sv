// x_prefetch: reads the quantized input vector once and caches it on chip.
//
// Pre-processing of x ("Read X"). On start it reads the N INT8 values of xq,
// sign-extends each to INT16 and stores them as N/GS group vectors of GS
// lanes (xq_vectors); it then reads the N/GS FP32 scales xs into a register
// vector (xs_vector). Both stay valid until the next start, so every row of
// the matrix reuses them without another DDR read. The INT16 cast, the
// group-vector layout and the on-chip caching follow the paper. The memory
// layout of xq and xs (contiguous, 16-byte aligned, FP32 little-endian, four
// per beat) and the registered read port are this design's choices.
//
// Timing: N/16 beats of xq, then ceil(N/GS/4) beats of xs; done pulses one
// cycle after the last beat. The read port returns the group selected by
// rd_group one cycle after rd_en.
module x_prefetch
  import llamaf_pkg::*;
#(
  parameter int unsigned N = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] xq_addr,
  input  logic [ADDR_W-1:0] xs_addr,
  output logic              done,
  mem_rd_if.master          mem,
  // xq_vectors read port (used by the dot-product stage)
  input  logic              rd_en,
  input  logic [$clog2(N/GS)-1:0] rd_group,
  output int16_t            rd_data [GS],
  // cached xs_vector (used by the accumulate stage)
  output fp32_t             xs_vector [N/GS]
);
  localparam int unsigned G         = N / GS;
  localparam int unsigned XQ_BEATS  = N / BEAT_BYTES;
  localparam int unsigned XS_BEATS  = (G * 4 + BEAT_BYTES - 1) / BEAT_BYTES;
  localparam int unsigned BPG       = GS / BEAT_BYTES;        // beats per group
  localparam int unsigned WPB       = BEAT_BYTES / 4;         // FP32 words per beat

  typedef enum logic [1:0] {IDLE, READ_XQ, READ_XS} state_t;
  state_t state;

  int16_t            xq_mem [G][GS];
  logic              rd_start, rd_busy, rd_done;
  logic [ADDR_W-1:0] rd_base;
  logic [31:0]       rd_beats;
  logic              beat_valid, beat_ready;
  logic [BEAT_W-1:0] beat_data;
  logic [31:0]       beat_cnt;

  burst_reader u_reader (
    .clk, .rst_n,
    .start(rd_start), .base_addr(rd_base), .num_beats(rd_beats),
    .busy(rd_busy), .done(rd_done),
    .mem,
    .beat_valid, .beat_ready, .beat_data
  );

  assign beat_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      rd_start <= 1'b0;
      rd_base  <= '0;
      rd_beats <= '0;
      beat_cnt <= '0;
      done     <= 1'b0;
      for (int g = 0; g < int'(G); g++) xs_vector[g] <= '0;
    end else begin
      rd_start <= 1'b0;
      done     <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          state    <= READ_XQ;
          rd_start <= 1'b1;
          rd_base  <= xq_addr;
          rd_beats <= XQ_BEATS;
          beat_cnt <= '0;
        end
        READ_XQ: begin
          if (beat_valid) beat_cnt <= beat_cnt + 1;
          if (rd_done) begin
            state    <= READ_XS;
            rd_start <= 1'b1;
            rd_base  <= xs_addr;
            rd_beats <= XS_BEATS;
            beat_cnt <= '0;
          end
        end
        READ_XS: begin
          if (beat_valid) begin
            for (int w = 0; w < int'(WPB); w++)
              if (beat_cnt * WPB + w < G)
                xs_vector[beat_cnt * WPB + w] <= beat_data[32*w +: 32];
            beat_cnt <= beat_cnt + 1;
          end
          if (rd_done) begin
            state <= IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // xq cache: one beat fills 16 lanes of one group vector
  always_ff @(posedge clk) begin
    if (state == READ_XQ && beat_valid) begin
      for (int b = 0; b < int'(BEAT_BYTES); b++)
        xq_mem[beat_cnt / BPG][(beat_cnt % BPG) * BEAT_BYTES + b] <=
          int8_to_16(beat_data[8*b +: 8]);
    end
    if (rd_en) rd_data <= xq_mem[rd_group];
  end

endmodule
