// kv_cluster: channel-wise KV aggregator with exponent delta transformation.
//
// A token group of NTOK tokens, each a KV vector of NCH BF16 channels, arrives
// token by token (beat = 16 consecutive channels of one token). While it
// arrives, the module keeps per channel j the minimum exponent seen, which is
// the base exponent beta_j. Once the group is complete it emits the group
// channel-major: channel j's NTOK values (the row G_j of the paper), 16 tokens
// per beat, channel 0 first. In each emitted value the exponent field is
// replaced by delta = exponent - beta_j; sign and fraction pass unchanged. Fed
// to the bit-plane aggregator, this stream yields exactly the concatenated
// bit-planes of the paper (P_i(G_0), P_i(G_1), ...).
//
// beta_j is read through beta_idx/beta (combinational) for the block header;
// it stays valid until the next group starts. The delta is never negative
// because beta_j is the minimum, so 8 bits hold it and the transformation is
// lossless. Following the paper: channel-wise regrouping, minimum exponent as
// base, a subtractor and a per-channel metadata buffer. Own choices: NTOK = 32
// (the paper leaves n open) and NCH = 1024 (8 KV heads x 128 dims of
// LLaMA 3.1 8B), which make a group 32768 values, one 4 KB plane per bit.
// Timing: fill NTOK*NCH/16 cycles, then drain the same number; not both at once.
module kv_cluster
  import cmc_pkg::*;
#(
  parameter int unsigned NTOK = 32,
  parameter int unsigned NCH  = 1024
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [BEAT_W-1:0]       in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [BEAT_W-1:0]       out_data,
  output logic                    out_last,
  input  logic [$clog2(NCH)-1:0]  beta_idx,
  output logic [EXP_W-1:0]        beta
);
  localparam int unsigned TW = $clog2(NTOK);
  localparam int unsigned CW = $clog2(NCH / 16);   // channel chunk index
  localparam int unsigned JW = $clog2(NCH);
  localparam int unsigned UW = $clog2(NTOK / 16);  // token chunk index

  typedef enum logic {FILL, DRAIN} state_e;
  state_e        state;
  logic [TW-1:0] tok;
  logic [CW-1:0] chunk;
  logic [JW-1:0] ch;
  logic [UW-1:0] tchunk;
  logic [BEAT_W-1:0] rd_data;

  // Per-channel base exponents, 16 channels per word (one word per input beat).
  logic [16*EXP_W-1:0] base_mem [NCH / 16];
  logic [16*EXP_W-1:0] base_old, base_new;

  skew_transpose #(.ROWS(NTOK), .COLS(NCH)) u_buf (
    .clk     (clk),
    .wr_en   (state == FILL && in_valid),
    .wr_row  (tok),
    .wr_chunk(chunk),
    .wr_data (in_data),
    .rd_col  (ch),
    .rd_chunk(tchunk),
    .rd_data (rd_data)
  );

  assign base_old = base_mem[chunk];
  always_comb
    for (int k = 0; k < 16; k++) begin
      logic [EXP_W-1:0] e;
      e = in_data[k*VAL_W + EXP_LSB +: EXP_W];
      base_new[k*EXP_W +: EXP_W] =
        (tok == '0 || e < base_old[k*EXP_W +: EXP_W]) ? e : base_old[k*EXP_W +: EXP_W];
    end

  always_ff @(posedge clk)
    if (state == FILL && in_valid) base_mem[chunk] <= base_new;

  // Drain: all 16 values of a beat share channel ch, hence one beta.
  logic [EXP_W-1:0] beta_ch;
  logic [16*EXP_W-1:0] base_rd;
  assign base_rd = base_mem[ch[JW-1:4]];
  assign beta_ch = base_rd[ch[3:0]*EXP_W +: EXP_W];
  always_comb begin
    out_data = rd_data;
    for (int k = 0; k < 16; k++)
      out_data[k*VAL_W + EXP_LSB +: EXP_W] = rd_data[k*VAL_W + EXP_LSB +: EXP_W] - beta_ch;
  end

  logic [16*EXP_W-1:0] base_q;
  assign base_q = base_mem[beta_idx[JW-1:4]];
  assign beta   = base_q[beta_idx[3:0]*EXP_W +: EXP_W];

  assign in_ready  = (state == FILL);
  assign out_valid = (state == DRAIN);
  assign out_last  = (ch == JW'(NCH - 1)) && (tchunk == UW'(NTOK / 16 - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= FILL;
      tok    <= '0;
      chunk  <= '0;
      ch     <= '0;
      tchunk <= '0;
    end else if (state == FILL) begin
      if (in_valid) begin
        chunk <= chunk + 1'b1;
        if (chunk == CW'(NCH / 16 - 1)) begin
          tok <= tok + 1'b1;
          if (tok == TW'(NTOK - 1)) state <= DRAIN;
        end
      end
    end else if (out_ready) begin
      tchunk <= tchunk + 1'b1;
      if (tchunk == UW'(NTOK / 16 - 1)) begin
        ch <= ch + 1'b1;
        if (out_last) begin
          state <= FILL;
          tok   <= '0;
          chunk <= '0;
        end
      end
    end
  end
endmodule
