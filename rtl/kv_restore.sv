// kv_restore: read-path inverse of kv_cluster.
//
// The per-channel base exponents of a block are first loaded through the
// beta_wr_* port (one byte per cycle, from the block header). The block then
// arrives channel-major, as the bit-plane deaggregator emits it: channel j's
// NTOK values, 16 tokens per beat. Each value's exponent field is restored as
// beta_j + delta while it is written into a transpose buffer; when the group
// is complete it leaves token by token (beat = 16 consecutive channels of one
// token), the original per-token KV layout. Following the paper: exponents
// restored via beta_j + delta and per-token output. When low bit-planes were
// skipped (dynamic quantization), delta has zeroed low bits and the restored
// exponent is beta_j + truncated delta; the fraction bits that were skipped
// stay 0. Timing: fill NTOK*NCH/16 cycles, then drain as many.
module kv_restore
  import cmc_pkg::*;
#(
  parameter int unsigned NTOK = 32,
  parameter int unsigned NCH  = 1024
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    beta_wr_en,
  input  logic [$clog2(NCH)-1:0]  beta_wr_idx,
  input  logic [EXP_W-1:0]        beta_wr_data,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [BEAT_W-1:0]       in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [BEAT_W-1:0]       out_data,
  output logic                    out_last
);
  localparam int unsigned TW = $clog2(NTOK);
  localparam int unsigned CW = $clog2(NCH / 16);
  localparam int unsigned JW = $clog2(NCH);
  localparam int unsigned UW = $clog2(NTOK / 16);

  typedef enum logic {FILL, DRAIN} state_e;
  state_e        state;
  logic [JW-1:0] ch;       // fill: channel
  logic [UW-1:0] tchunk;   // fill: token chunk
  logic [TW-1:0] tok;      // drain: token
  logic [CW-1:0] chunk;    // drain: channel chunk

  logic [EXP_W-1:0] beta_mem [NCH];
  always_ff @(posedge clk)
    if (beta_wr_en) beta_mem[beta_wr_idx] <= beta_wr_data;

  logic [EXP_W-1:0]  beta_ch;
  logic [BEAT_W-1:0] wr_data;
  assign beta_ch = beta_mem[ch];
  always_comb begin
    wr_data = in_data;
    for (int k = 0; k < 16; k++)
      wr_data[k*VAL_W + EXP_LSB +: EXP_W] = in_data[k*VAL_W + EXP_LSB +: EXP_W] + beta_ch;
  end

  skew_transpose #(.ROWS(NCH), .COLS(NTOK)) u_buf (
    .clk     (clk),
    .wr_en   (state == FILL && in_valid),
    .wr_row  (ch),
    .wr_chunk(tchunk),
    .wr_data (wr_data),
    .rd_col  (tok),
    .rd_chunk(chunk),
    .rd_data (out_data)
  );

  assign in_ready  = (state == FILL);
  assign out_valid = (state == DRAIN);
  assign out_last  = (tok == TW'(NTOK - 1)) && (chunk == CW'(NCH / 16 - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= FILL;
      ch     <= '0;
      tchunk <= '0;
      tok    <= '0;
      chunk  <= '0;
    end else if (state == FILL) begin
      if (in_valid) begin
        tchunk <= tchunk + 1'b1;
        if (tchunk == UW'(NTOK / 16 - 1)) begin
          ch <= ch + 1'b1;
          if (ch == JW'(NCH - 1)) state <= DRAIN;
        end
      end
    end else if (out_ready) begin
      chunk <= chunk + 1'b1;
      if (chunk == CW'(NCH / 16 - 1)) begin
        tok <= tok + 1'b1;
        if (out_last) begin
          state  <= FILL;
          ch     <= '0;
          tchunk <= '0;
        end
      end
    end
  end
endmodule
