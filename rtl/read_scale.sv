// read_scale: streams the FP32 weight scales, one row's vector at a time.
//
// Pre-processing of the weight scales. The m x N/GS FP32 scales ws are
// stored contiguously, row after row; with N/GS = 22 a row (88 bytes) does not
// end on a beat boundary, so the stage unpacks each 128-bit beat into four
// words and re-packs the words into rows of N/GS. A complete row is offered
// on ws_stream as one vector. The packing into vectors of N/GS follows the
// paper; the layout in memory is this design's choice.
//
// Interface: ws_* carries one row, word g in bits [32g +: 32]. A beat is taken
// only when all four of its words fit, so the stage stalls while a finished
// row waits on a full stream. done pulses after the last beat.
module read_scale
  import llamaf_pkg::*;
#(
  parameter int unsigned N = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] ws_addr,
  input  logic [31:0]       m,
  output logic              done,
  mem_rd_if.master          mem,
  output logic              ws_valid,
  input  logic              ws_ready,
  output logic [32*(N/GS)-1:0] ws_data
);
  localparam int unsigned G   = N / GS;
  localparam int unsigned WPB = BEAT_BYTES / 4;

  logic              beat_valid, beat_ready, rd_busy;
  logic [BEAT_W-1:0] beat_data;
  logic [31:0]       total_words, words_in;
  // row being filled and a spill-over of up to WPB-1 words for the next row
  fp32_t             row   [G];
  fp32_t             spill [WPB];
  logic [$clog2(G+1)-1:0] fill;      // words held in row
  logic [$clog2(WPB+1)-1:0] nspill;
  logic              full;

  burst_reader u_reader (
    .clk, .rst_n,
    .start,
    .base_addr(ws_addr),
    .num_beats((m * G + WPB - 1) / WPB),
    .busy(rd_busy), .done,
    .mem,
    .beat_valid, .beat_ready, .beat_data
  );

  assign ws_valid   = full;
  assign beat_ready = !full && (nspill == '0);
  always_comb
    for (int g = 0; g < int'(G); g++) ws_data[32*g +: 32] = row[g];

  // where the words of the current beat go: the first ones fill the row,
  // any beyond it spill over into the next row
  logic [$clog2(G+1)-1:0]   fill_next;
  logic [$clog2(WPB+1)-1:0] spill_next;
  logic [WPB-1:0]           word_ok;        // word w of the beat belongs to the matrix
  logic [WPB-1:0]           word_to_row;    // word w goes to the row (else to spill)
  int unsigned              word_slot [WPB];

  always_comb begin
    int unsigned f, s;
    f = 32'(fill);
    s = 0;
    for (int w = 0; w < int'(WPB); w++) begin
      word_ok[w]     = (words_in + 32'(w) < total_words);
      word_to_row[w] = (f < G);
      word_slot[w]   = (f < G) ? f : s;
      if (word_ok[w]) begin
        if (f < G) f = f + 1;
        else       s = s + 1;
      end
    end
    fill_next  = ($clog2(G+1))'(f);
    spill_next = ($clog2(WPB+1))'(s);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill        <= '0;
      nspill      <= '0;
      full        <= 1'b0;
      words_in    <= '0;
      total_words <= '0;
      for (int w = 0; w < int'(WPB); w++) spill[w] <= '0;
      for (int g = 0; g < int'(G); g++)   row[g]   <= '0;
    end else begin
      if (start) begin
        total_words <= m * G;
        words_in    <= '0;
      end
      if (full && ws_ready) begin
        // row taken: move the spilled words to the front of the next row
        full <= 1'b0;
        for (int w = 0; w < int'(WPB); w++)
          if (w < int'(nspill)) row[w] <= spill[w];
        fill   <= ($clog2(G+1))'(nspill);
        nspill <= '0;
        if (int'(nspill) == int'(G)) full <= 1'b1;
      end else if (beat_valid && beat_ready) begin
        for (int w = 0; w < int'(WPB); w++) begin
          if (word_ok[w]) begin
            if (word_to_row[w]) begin
              for (int g = 0; g < int'(G); g++)
                if (word_slot[w] == g) row[g] <= beat_data[32*w +: 32];
            end else begin
              for (int t = 0; t < int'(WPB); t++)
                if (word_slot[w] == t) spill[t] <= beat_data[32*w +: 32];
            end
          end
        end
        words_in <= words_in + WPB;
        fill     <= fill_next;
        nspill   <= spill_next;
        if (int'(fill_next) == int'(G)) full <= 1'b1;
      end
    end
  end

endmodule
