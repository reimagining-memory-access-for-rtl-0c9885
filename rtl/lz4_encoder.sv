// lz4_encoder: lossless compression of one bit-plane into an LZ4 block.
//
// The plane arrives as 256-bit words (byte b of the plane is bits
// [8*(b%32)+7 : 8*(b%32)] of word b/32; in_last on the final word) and is held
// in a BLK_BYTES buffer. The encoder then walks the buffer one position per
// cycle: it hashes the 4 bytes at position i, looks the hash up in a table of
// the last position that had that hash, stores i there, and compares the 4
// bytes at the candidate with those at i. On a hit it extends the match one
// byte per cycle and emits a sequence in the standard LZ4 block format:
// token (literal length, match length - 4), length extension bytes, the
// literals, a 2-byte little-endian offset, match length extension bytes. The
// block ends with a literal-only sequence; the LZ4 end-of-block rules are
// kept (no match starts in the last 12 bytes, the last 5 bytes are literals),
// so any LZ4 block decoder can read the output.
//
// The paper names LZ4 (and ZSTD) as the block compressor and gives no
// internals; this greedy single-hash-probe engine is the simplest design that
// produces LZ4 blocks. It compresses at most one input byte per cycle, far
// below the 512 Gbit/s per lane the paper reports. Hash table entries are
// never cleared between blocks: a stale entry is only a candidate, and every
// candidate is checked against the buffer, so the output is always correct.
// Output: one compressed byte per cycle on out_*, out_last on the final byte;
// done pulses with the compressed length clen once the block is emitted.
// Lint note: only the top HASH_BITS bits of the 32-bit multiplicative hash
// product are used, by design of that hash; the low bits are left unused.
module lz4_encoder
  import cmc_pkg::*;
#(
  parameter int unsigned BLK_BYTES = 4096,
  parameter int unsigned HASH_BITS = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [BEAT_W-1:0] in_data,
  input  logic              in_last,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [7:0]        out_data,
  output logic              out_last,
  output logic              done,
  output logic [LEN_W-1:0]  clen
);
  localparam int unsigned NWORDS = BLK_BYTES / 32;
  localparam int unsigned PW     = $clog2(BLK_BYTES) + 1;   // position / length width

  typedef enum logic [3:0] {
    LOAD, SEARCH, EXTEND, E_TOKEN, E_LLEXT, E_LIT, E_OFF0, E_OFF1, E_MLEXT, FIN
  } state_e;
  state_e state;

  logic [BEAT_W-1:0] buf_mem [NWORDS];
  logic [PW-1:0]     ht [2**HASH_BITS];

  logic [PW-1:0] len, i, anchor, cand, ml, ll, rem, litpos;
  logic          final_seq;
  logic [LEN_W-1:0] ocnt;

  function automatic logic [7:0] rdb(input logic [BEAT_W-1:0] w, input logic [4:0] sel);
    return w[sel*8 +: 8];
  endfunction

  // Byte reads from the word buffer (asynchronous read ports).
  logic [31:0]          seq;
  logic [HASH_BITS-1:0] h;
  logic [PW-1:0]        ht_cand;
  logic                 hit;
  logic [31:0]          hash_prod;
  logic [PW-1:0] pa [4], pb [4];
  logic [7:0]    ba [4], bb [4];
  for (genvar k = 0; k < 4; k++) begin : g_rd
    assign pa[k] = (state == EXTEND) ? i + ml + PW'(k) : i + PW'(k);
    assign pb[k] = (state == EXTEND) ? cand + ml + PW'(k) : ht_cand + PW'(k);
    assign ba[k] = rdb(buf_mem[pa[k][PW-2:5]], pa[k][4:0]);
    assign bb[k] = rdb(buf_mem[pb[k][PW-2:5]], pb[k][4:0]);
  end

  assign seq       = {ba[3], ba[2], ba[1], ba[0]};
  assign hash_prod = seq * 32'd2654435761;           // Knuth multiplicative hash
  assign h         = hash_prod[31 -: HASH_BITS];
  assign ht_cand   = ht[h];
  assign hit       = (ht_cand < i) && ({bb[3], bb[2], bb[1], bb[0]} == seq);

  logic [7:0] lit_byte;
  assign lit_byte = rdb(buf_mem[litpos[PW-2:5]], litpos[4:0]);

  logic [PW-1:0] mlc;       // match length code (ml - 4)
  assign mlc = ml - PW'(4);

  always_comb begin
    out_valid = 1'b0;
    out_data  = '0;
    out_last  = 1'b0;
    unique case (state)
      E_TOKEN: begin
        out_valid = 1'b1;
        out_data  = {(ll >= PW'(15)) ? 4'd15 : ll[3:0],
                     final_seq ? 4'd0 : ((mlc >= PW'(15)) ? 4'd15 : mlc[3:0])};
      end
      E_LLEXT, E_MLEXT: begin
        out_valid = 1'b1;
        out_data  = (rem >= PW'(255)) ? 8'd255 : rem[7:0];
      end
      E_LIT: begin
        out_valid = 1'b1;
        out_data  = lit_byte;
        out_last  = final_seq && (litpos == len - 1'b1);
      end
      E_OFF0: begin
        out_valid = 1'b1;
        out_data  = 8'(i - cand);
      end
      E_OFF1: begin
        out_valid = 1'b1;
        out_data  = 8'((i - cand) >> 8);
      end
      default: ;
    endcase
  end

  assign in_ready = (state == LOAD);
  assign done     = (state == FIN);
  assign clen     = ocnt;

  // After the literals of a sequence: offset (match) or end of block.
  function automatic state_e after_lits(input logic fin);
    return fin ? FIN : E_OFF0;
  endfunction

  always_ff @(posedge clk)
    if (state == SEARCH && i + PW'(12) <= len) ht[h] <= i;

  always_ff @(posedge clk)
    if (state == LOAD && in_valid) buf_mem[len[PW-2:5]] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= LOAD;
      len       <= '0;
      i         <= '0;
      anchor    <= '0;
      cand      <= '0;
      ml        <= '0;
      ll        <= '0;
      rem       <= '0;
      litpos    <= '0;
      final_seq <= 1'b0;
      ocnt      <= '0;
    end else begin
      if (out_valid && out_ready) ocnt <= ocnt + 1'b1;
      unique case (state)
        LOAD: if (in_valid) begin
          len <= len + PW'(32);
          if (in_last) begin
            state  <= SEARCH;
            i      <= '0;
            anchor <= '0;
            ocnt   <= '0;
          end
        end
        SEARCH: begin
          if (i + PW'(12) > len) begin            // no match may start here
            final_seq <= 1'b1;
            ll        <= len - anchor;
            litpos    <= anchor;
            state     <= E_TOKEN;
          end else if (hit) begin
            cand  <= ht_cand;
            ml    <= PW'(4);
            state <= EXTEND;
          end else begin
            i <= i + 1'b1;
          end
        end
        EXTEND: begin
          if ((i + ml < len - PW'(5)) && (ba[0] == bb[0])) begin
            ml <= ml + 1'b1;
          end else begin
            final_seq <= 1'b0;
            ll        <= i - anchor;
            litpos    <= anchor;
            state     <= E_TOKEN;
          end
        end
        E_TOKEN: if (out_ready) begin
          if (ll >= PW'(15)) begin
            rem   <= ll - PW'(15);
            state <= E_LLEXT;
          end else if (ll != '0) state <= E_LIT;
          else                   state <= after_lits(final_seq);
        end
        E_LLEXT: if (out_ready) begin
          if (rem >= PW'(255)) rem <= rem - PW'(255);
          else state <= (ll != '0) ? E_LIT : after_lits(final_seq);
        end
        E_LIT: if (out_ready) begin
          litpos <= litpos + 1'b1;
          if (litpos == anchor + ll - 1'b1) state <= after_lits(final_seq);
        end
        E_OFF0: if (out_ready) state <= E_OFF1;
        E_OFF1: if (out_ready) begin
          if (mlc >= PW'(15)) begin
            rem   <= mlc - PW'(15);
            state <= E_MLEXT;
          end else begin
            i      <= i + ml;
            anchor <= i + ml;
            state  <= SEARCH;
          end
        end
        E_MLEXT: if (out_ready) begin
          if (rem >= PW'(255)) rem <= rem - PW'(255);
          else begin
            i      <= i + ml;
            anchor <= i + ml;
            state  <= SEARCH;
          end
        end
        FIN: begin
          state <= LOAD;
          len   <= '0;
        end
        default: state <= LOAD;
      endcase
    end
  end
endmodule
