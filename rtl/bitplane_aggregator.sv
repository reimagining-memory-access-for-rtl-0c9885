// bitplane_aggregator: write-path bit-plane disaggregation.
//
// A block of NVALS BF16 values arrives as beats of 16 values (256 bits per
// cycle). Bit i of every value is steered into plane buffer i, so after the
// block each of the 16 plane buffers holds one bit-plane P_i = {b_1,i ..
// b_m,i} of NVALS bits. The planes are then streamed out, most significant
// plane first (P15, P14, ..., P0), 256 bits per cycle, each plane as
// NVALS/256 words. In a plane word w, bit k is bit i of value 256*w+k.
//
// Following the paper: the shuffle into plane-specific buffers, one buffer per
// bit position, and whole planes handed to the compressor once the block is
// complete. The default plane buffer is 4 KB (NVALS = 32768), the upper end
// of the 1-4 KB the paper gives and its 4 KB compression block. Design
// choices: a single (not ping-pong) buffer, so the block is first filled
// (NVALS/16 cycles, in_ready high) and then drained (16*NVALS/256 cycles,
// in_ready low); planes leave MSB first so that the top K planes of a stored
// block form one contiguous prefix in memory.
//
// Narrow elements: with fmt = FP8 or INT4 a beat carries 32 or 64 elements
// of 8 or 4 bits, the block has NVALS/32 or NVALS/64 beats, and only planes
// 7..0 or 3..0 exist and are drained. Each plane word still gathers 256
// values, from 8 or 4 beats instead of 16; the plane buffers are therefore
// written in 16-bit chunks, 1, 2 or 4 chunks per beat. The paper evaluates
// FP8 and INT4 models with the same placement but does not describe the
// hardware for them; this format switch is this design's own.
//
// Interface: valid/ready streams. fmt must be held for the whole block, fill
// and drain. out_plane names the plane of out_data, out_plane_last marks the
// last word of a plane, out_last the last word of the block.
module bitplane_aggregator
  import cmc_pkg::*;
#(
  parameter int unsigned NVALS = 32768
) (
  input  logic              clk,
  input  logic              rst_n,
  input  fmt_e              fmt,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [BEAT_W-1:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [BEAT_W-1:0] out_data,
  output logic [3:0]        out_plane,
  output logic              out_plane_last,
  output logic              out_last
);
  localparam int unsigned NBEATS = NVALS / VALS_PER_BEAT;  // BF16 input beats per block
  localparam int unsigned NWORDS = NVALS / BEAT_W;         // 256-bit words per plane
  localparam int unsigned BW     = $clog2(NBEATS);
  localparam int unsigned WW     = (NWORDS > 1) ? $clog2(NWORDS) : 1;
  localparam int unsigned NCHUNK = BEAT_W / 16;            // 16-bit chunks per plane word

  typedef enum logic {FILL, DRAIN} state_e;
  state_e          state;
  logic [BW-1:0]   beat;
  logic [WW-1:0]   word;
  logic [3:0]      plane;
  logic [1:0]      sh;
  logic [3:0]      top_plane;
  logic [BW-1:0]   last_beat;
  logic [WW-1:0]   wr_word;
  logic [3:0]      wr_off;
  logic [BEAT_W-1:0] rd_word [NPLANES];

  assign sh        = fmt_shift(fmt);
  assign top_plane = 4'((NPLANES >> sh) - 1);
  assign last_beat = BW'((NBEATS >> sh) - 1);
  // A plane word gathers 16 >> sh beats: beat b fills part (b mod 16>>sh) of
  // word b / (16>>sh).
  assign wr_word   = WW'(beat >> (4 - sh));
  assign wr_off    = 4'(beat) & (4'hF >> sh);

  for (genvar p = 0; p < NPLANES; p++) begin : g_plane
    // bit p of every element of the beat: 16, 32 or 64 bits
    logic [63:0] slice;
    always_comb begin
      slice = '0;
      unique case (sh)
        2'd1:    for (int k = 0; k < 32; k++) slice[k] = in_data[k*8 + (p % 8)];
        2'd2:    for (int k = 0; k < 64; k++) slice[k] = in_data[k*4 + (p % 4)];
        default: for (int k = 0; k < 16; k++) slice[k] = in_data[k*16 + p];
      endcase
    end
    for (genvar c = 0; c < NCHUNK; c++) begin : g_chunk
      logic [15:0] mem [NWORDS];
      always_ff @(posedge clk)
        if (state == FILL && in_valid && 4'(c >> sh) == wr_off)
          mem[wr_word] <= slice[(c % (1 << sh)) * 16 +: 16];
      assign rd_word[p][c*16 +: 16] = mem[word];
    end
  end

  assign in_ready       = (state == FILL);
  assign out_valid      = (state == DRAIN);
  assign out_data       = rd_word[plane];
  assign out_plane      = plane;
  assign out_plane_last = (word == WW'(NWORDS - 1));
  assign out_last       = out_plane_last && (plane == 4'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= FILL;
      beat  <= '0;
      word  <= '0;
      plane <= 4'(NPLANES - 1);
    end else if (state == FILL) begin
      if (in_valid) begin
        beat <= beat + 1'b1;
        if (beat == last_beat) begin
          state <= DRAIN;
          word  <= '0;
          plane <= top_plane;
        end
      end
    end else if (out_ready) begin
      if (out_plane_last) begin
        word  <= '0;
        plane <= plane - 1'b1;
        if (plane == 4'd0) begin
          state <= FILL;
          beat  <= '0;
        end
      end else begin
        word <= word + 1'b1;
      end
    end
  end
endmodule
