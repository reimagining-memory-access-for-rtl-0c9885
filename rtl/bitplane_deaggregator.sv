// bitplane_deaggregator: read-path reconstitution of values from bit-planes.
//
// Decompressed plane words (256 bits, in_plane names the plane) are written
// into 16 plane buffers. A read fetches only the K most significant planes of
// a block; in_last marks the last word of the last fetched plane. The module
// then emits the block in the standard per-value layout, 16 BF16 values per
// beat, with every plane that was not received this block read as 0. That
// zero-fill is the selective retrieval of the paper: reading planes 15..8
// yields the top 8 bits of each value and skips the DRAM traffic of the rest.
//
// With fmt = FP8 or INT4 (weights stored as 8- or 4-bit elements, planes 7..0
// or 3..0) each output beat carries 32 or 64 elements and the block leaves in
// NVALS/32 or NVALS/64 beats; each beat takes 32 or 64 bits of every plane
// word. fmt must be held from the first plane word to the last output beat.
//
// Timing: fill at one word per cycle, then NVALS/16 output beats at one per
// cycle (in_ready low meanwhile). Plane buffers are 4 KB each by default, as
// in the write path. The plane-present mask is this design's own mechanism
// for the zero-fill; it is cleared when the block has been emitted.
module bitplane_deaggregator
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
  input  logic [3:0]        in_plane,
  input  logic              in_last,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [BEAT_W-1:0] out_data,
  output logic              out_last
);
  localparam int unsigned NBEATS = NVALS / VALS_PER_BEAT;
  localparam int unsigned NWORDS = NVALS / BEAT_W;
  localparam int unsigned BW     = $clog2(NBEATS);
  localparam int unsigned WW     = (NWORDS > 1) ? $clog2(NWORDS) : 1;

  typedef enum logic {FILL, DRAIN} state_e;
  state_e             state;
  logic [WW-1:0]      wcnt [NPLANES];   // next word to write, per plane
  logic [NPLANES-1:0] present;
  logic [BW-1:0]      beat;
  logic [1:0]         sh;
  logic [WW-1:0]      rd_word;
  logic [3:0]         rd_off;           // which part of a plane word this beat takes
  logic [7:0]         rd_shift;         // bit offset of this beat's part of a plane word
  logic [63:0]        rd_slice [NPLANES];

  assign sh       = fmt_shift(fmt);
  assign rd_word  = WW'(beat >> (4 - sh));
  assign rd_off   = 4'(beat) & (4'hF >> sh);
  assign rd_shift = 8'(rd_off) << (4 + sh);

  for (genvar p = 0; p < NPLANES; p++) begin : g_plane
    logic [BEAT_W-1:0] mem [NWORDS];
    logic [BEAT_W-1:0] w;
    always_ff @(posedge clk)
      if (state == FILL && in_valid && in_plane == 4'(p)) mem[wcnt[p]] <= in_data;
    assign w           = mem[rd_word];
    assign rd_slice[p] = present[p] ? 64'(w >> rd_shift) : '0;
  end

  // Output beat: element k takes bit p from bit k of plane p's part.
  always_comb begin
    out_data = '0;
    unique case (sh)
      2'd1: for (int k = 0; k < 32; k++)
              for (int p = 0; p < 8; p++) out_data[k*8 + p] = rd_slice[p][k];
      2'd2: for (int k = 0; k < 64; k++)
              for (int p = 0; p < 4; p++) out_data[k*4 + p] = rd_slice[p][k];
      default: for (int k = 0; k < 16; k++)
              for (int p = 0; p < 16; p++) out_data[k*16 + p] = rd_slice[p][k];
    endcase
  end

  assign in_ready  = (state == FILL);
  assign out_valid = (state == DRAIN);
  assign out_last  = (beat == BW'((NBEATS >> sh) - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= FILL;
      present <= '0;
      beat    <= '0;
      for (int p = 0; p < NPLANES; p++) wcnt[p] <= '0;
    end else if (state == FILL) begin
      if (in_valid) begin
        wcnt[in_plane]    <= wcnt[in_plane] + 1'b1;
        present[in_plane] <= 1'b1;
        if (in_last) begin
          state <= DRAIN;
          beat  <= '0;
        end
      end
    end else if (out_ready) begin
      beat <= beat + 1'b1;
      if (out_last) begin
        state   <= FILL;
        present <= '0;
        for (int p = 0; p < NPLANES; p++) wcnt[p] <= '0;
      end
    end
  end
endmodule
