// lz4_decoder: decompression of one LZ4 block back into a bit-plane.
//
// start (with clen, the compressed length from the block header) begins a
// block. Compressed bytes are then taken one per cycle on in_*. The decoder
// parses LZ4 sequences: token, literal length extension, literals (copied to
// the output), 2-byte offset, match length extension, then the match, copied
// one byte per cycle from the history of bytes already produced (an overlap
// with the bytes being written is handled by the byte-serial copy). The block
// ends after the literals that consume the clen-th input byte. Produced bytes
// are packed into 256-bit words (byte b in bits [8b+7:8b]) for the bit-plane
// deaggregator; out_last marks the final word and done pulses after it.
//
// The paper uses LZ4/ZSTD decoding without giving internals; this is the
// simplest LZ4 block decoder: one output byte per cycle, a BLK_BYTES history
// (the whole 4 KB plane, so every legal offset is in range). A block whose
// output is not a whole number of words gets its last word zero-padded.
// Lint note: the LZ4 offset field is 16 bits, but with a BLK_BYTES history
// only its low log2(BLK_BYTES) bits address it; the upper bits are unused
// (a valid block never has an offset beyond the bytes already produced).
module lz4_decoder
  import cmc_pkg::*;
#(
  parameter int unsigned BLK_BYTES = 4096
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [LEN_W-1:0]  clen,
  output logic              busy,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [7:0]        in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [BEAT_W-1:0] out_data,
  output logic              out_last,
  output logic              done
);
  localparam int unsigned AW = $clog2(BLK_BYTES);

  typedef enum logic [3:0] {
    IDLE, TOKEN, LLEXT, LIT, OFF0, OFF1, MLEXT, COPY, FLUSH
  } state_e;
  state_e state;

  logic [7:0]       hist [BLK_BYTES];
  logic [AW-1:0]    wpos;
  logic [LEN_W-1:0] icnt, clen_q;
  logic [LEN_W-1:0] ll, ml;
  logic [3:0]       mlnib;
  logic [15:0]      off;
  logic [BEAT_W-1:0] wbuf;
  logic [4:0]       wcnt;
  logic             word_full;

  logic       prod;          // a byte is produced this cycle
  logic [7:0] pbyte;
  logic       take;          // an input byte is consumed this cycle
  logic       last_in;       // the byte taken is the block's last
  logic [7:0] copy_byte;

  assign copy_byte = hist[wpos - off[AW-1:0]];
  assign last_in   = (icnt == clen_q - 1'b1);

  always_comb begin
    in_ready = 1'b0;
    prod     = 1'b0;
    pbyte    = in_data;
    unique case (state)
      TOKEN, LLEXT, OFF0, OFF1, MLEXT: in_ready = 1'b1;
      LIT: begin
        in_ready = !word_full;
        prod     = in_valid && !word_full;
      end
      COPY: begin
        prod  = !word_full;
        pbyte = copy_byte;
      end
      default: ;
    endcase
  end
  assign take = in_valid && in_ready;

  assign out_valid = word_full;
  assign out_data  = wbuf;
  assign out_last  = word_full && (state == FLUSH);
  assign busy      = (state != IDLE);
  assign done      = out_valid && out_ready && out_last;

  always_ff @(posedge clk)
    if (prod) hist[wpos] <= pbyte;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      wpos      <= '0;
      icnt      <= '0;
      clen_q    <= '0;
      ll        <= '0;
      ml        <= '0;
      mlnib     <= '0;
      off       <= '0;
      wbuf      <= '0;
      wcnt      <= '0;
      word_full <= 1'b0;
    end else begin
      if (take) icnt <= icnt + 1'b1;
      if (out_valid && out_ready) word_full <= 1'b0;
      if (prod) begin
        wpos <= wpos + 1'b1;
        wbuf[wcnt*8 +: 8] <= pbyte;
        wcnt <= wcnt + 1'b1;
        if (wcnt == 5'd31) word_full <= 1'b1;
      end
      unique case (state)
        IDLE: if (start) begin
          clen_q <= clen;
          icnt   <= '0;
          wpos   <= '0;
          wcnt   <= '0;
          wbuf   <= '0;
          state  <= TOKEN;
        end
        TOKEN: if (take) begin
          ll    <= LEN_W'(in_data[7:4]);
          mlnib <= in_data[3:0];
          if (in_data[7:4] == 4'd15) state <= LLEXT;
          else if (in_data[7:4] != 4'd0) state <= LIT;
          else if (last_in) state <= FLUSH;
          else state <= OFF0;
        end
        LLEXT: if (take) begin
          ll <= ll + LEN_W'(in_data);
          if (in_data != 8'd255) state <= LIT;
        end
        LIT: if (take) begin
          ll <= ll - 1'b1;
          if (ll == LEN_W'(1)) state <= last_in ? FLUSH : OFF0;
        end
        OFF0: if (take) begin
          off[7:0] <= in_data;
          state    <= OFF1;
        end
        OFF1: if (take) begin
          off[15:8] <= in_data;
          ml        <= LEN_W'(mlnib) + LEN_W'(4);
          state     <= (mlnib == 4'd15) ? MLEXT : COPY;
        end
        MLEXT: if (take) begin
          ml <= ml + LEN_W'(in_data);
          if (in_data != 8'd255) state <= COPY;
        end
        COPY: if (prod) begin
          ml <= ml - 1'b1;
          if (ml == LEN_W'(1)) state <= TOKEN;
        end
        FLUSH: begin
          // pad a partial last word; leave once the last word is taken
          if (!word_full && wcnt != '0) begin
            word_full <= 1'b1;
            wcnt      <= '0;
          end else if (!word_full) begin
            state <= IDLE;
          end else if (out_ready) begin
            state <= IDLE;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
