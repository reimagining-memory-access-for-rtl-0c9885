// cmc_lane: one lane of the compression-aware memory controller.
//
// A lane stores and loads whole blocks of NVALS BF16 values (32768 values =
// 64 KB by default). A write command is followed by the block on wdata
// (16 values per beat). Weights go straight to the bit-plane aggregator; KV
// cache blocks (NTOK tokens x NCH channels, token by token) first pass the
// channel-wise KV aggregator, which regroups them by channel and replaces
// exponents by deltas to a per-channel base. The 16 bit-planes leave the
// aggregator MSB plane first, are compressed one by one by the LZ4 encoder
// and are written back to back to memory behind a header:
//
//   base + 0           16 x 2-byte compressed plane lengths, plane 15 first
//   base + 32          KV blocks only: NCH base exponents, one byte each
//   base + HDR         compressed P15, P14, ..., P0
//
// Weight blocks may instead hold FP8 or INT4 elements (cmd.fmt): the block
// then has 8 or 4 planes, NVALS/32 or NVALS/64 host beats, and the header
// entries of the planes it lacks are 0. A read must give the same fmt as the
// write. KV blocks are BF16 only (checked by an assertion).
//
// A read command with nplanes = K reads the header, then only the first K
// compressed planes (P15 .. P16-K), which thanks to the MSB-first order are a
// single contiguous range; the memory traffic thus shrinks with the chosen
// precision. Each plane is decompressed, the deaggregator rebuilds the values
// (missing low planes read as 0), KV blocks get their exponents restored and
// their per-token order back, and the block leaves on rdata. resp_valid
// pulses at the end of each command with the bytes the command moved to or
// from memory.
//
// Memory side: byte-wide write port mw_* and read port mr_* toward the
// conventional DRAM controller, with in-order responses and no backpressure
// on them: the lane only issues a read when its response FIFO has a free
// slot. Header layout, byte-wide memory port, one block in flight per lane and
// the command encoding are this design's own choices; the paper says only
// that the header holds per-plane metadata and one base exponent per channel.
//
// Lint notes: the out_last / out_plane outputs of the KV aggregator, the
// bit-plane aggregator and the encoder are left unconnected on purpose; the
// lane tracks block and plane ends itself from out_plane_last and done.
// rst_n also appears in the command assertion's disable condition, which is
// verification only; hence a sync/async reset lint note on it.
module cmc_lane
  import cmc_pkg::*;
#(
  parameter int unsigned NVALS      = 32768,
  parameter int unsigned NTOK       = 32,
  parameter int unsigned NCH        = 1024,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // host (compute fabric) side
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  cmd_t              cmd,
  input  logic              wdata_valid,
  output logic              wdata_ready,
  input  logic [BEAT_W-1:0] wdata,
  output logic              rdata_valid,
  input  logic              rdata_ready,
  output logic [BEAT_W-1:0] rdata,
  output logic              rdata_last,
  output logic              resp_valid,
  output logic [ADDR_W-1:0] resp_bytes,
  // memory controller side
  output logic              mw_valid,
  input  logic              mw_ready,
  output logic [ADDR_W-1:0] mw_addr,
  output logic [7:0]        mw_data,
  output logic              mr_req_valid,
  input  logic              mr_req_ready,
  output logic [ADDR_W-1:0] mr_req_addr,
  input  logic              mr_resp_valid,
  input  logic [7:0]        mr_resp_data
);
  localparam int unsigned NBEATS      = NVALS / VALS_PER_BEAT;
  localparam int unsigned PLANE_BYTES = NVALS / 8;
  localparam int unsigned BW          = $clog2(NBEATS) + 1;
  localparam int unsigned JW          = $clog2(NCH);
  localparam int unsigned FW          = $clog2(FIFO_DEPTH) + 1;

  if (NTOK * NCH != NVALS) begin : g_size_check
    $error("a KV token group (NTOK x NCH) must fill one block of NVALS values");
  end

  typedef enum logic [2:0] {IDLE, W_BODY, W_HDR, R_HDR, R_BODY, R_OUT, RESP} state_e;
  state_e state;
  // the command fields kept while it executes (op is implied by the state)
  typedef struct packed {
    kind_e             kind;
    fmt_e              fmt;
    logic [ADDR_W-1:0] base;
    logic [4:0]        nplanes;
  } held_cmd_t;
  held_cmd_t cq;
  logic   is_kv;
  assign  is_kv = (cq.kind == KIND_KV);

  // element format of the block: number of planes and of host beats
  logic [1:0] sh;
  logic [4:0] npl;        // planes in the block: 16, 8 or 4
  logic [3:0] tp;         // its top plane
  assign sh  = fmt_shift(cq.fmt);
  assign npl = 5'(NPLANES >> sh);
  assign tp  = 4'(npl - 1'b1);

  logic [ADDR_W-1:0] hdr_bytes;
  assign hdr_bytes = ADDR_W'(PLANE_HDR_BYTES) + (is_kv ? ADDR_W'(NCH) : '0);

  logic [LEN_W-1:0]  lens [NPLANES];   // compressed length per plane
  logic [4:0]        pcnt;             // planes done
  logic [BW-1:0]     win;              // beats accepted
  logic [ADDR_W-1:0] body_off;         // body bytes written
  logic [ADDR_W-1:0] hcnt;             // header bytes written / received
  logic [ADDR_W-1:0] body_total;       // body bytes to read

  // ---------------------------------------------------------------- write path
  logic kvc_in_valid, kvc_in_ready, kvc_out_valid, kvc_out_ready;
  logic [BEAT_W-1:0] kvc_out_data;
  logic [EXP_W-1:0]  kvc_beta;
  logic agg_in_valid, agg_in_ready, agg_out_valid, agg_out_ready, agg_plane_last;
  logic [BEAT_W-1:0] agg_in_data, agg_out_data;
  logic enc_out_valid, enc_out_ready, enc_done;
  logic [7:0]        enc_out_data;
  logic [LEN_W-1:0]  enc_clen;

  logic w_take;
  assign w_take       = (state == W_BODY) && (win < BW'(NBEATS >> sh));
  assign kvc_in_valid = w_take && is_kv && wdata_valid;
  assign wdata_ready  = w_take && (is_kv ? kvc_in_ready : agg_in_ready);
  assign agg_in_valid = is_kv ? kvc_out_valid : (w_take && wdata_valid);
  assign agg_in_data  = is_kv ? kvc_out_data : wdata;
  assign kvc_out_ready = is_kv && agg_in_ready;

  kv_cluster #(.NTOK(NTOK), .NCH(NCH)) u_kvc (
    .clk, .rst_n,
    .in_valid (kvc_in_valid), .in_ready(kvc_in_ready), .in_data(wdata),
    .out_valid(kvc_out_valid), .out_ready(kvc_out_ready), .out_data(kvc_out_data),
    .out_last (),
    .beta_idx (JW'(hcnt - ADDR_W'(PLANE_HDR_BYTES))), .beta(kvc_beta)
  );

  bitplane_aggregator #(.NVALS(NVALS)) u_agg (
    .clk, .rst_n, .fmt(cq.fmt),
    .in_valid (agg_in_valid), .in_ready(agg_in_ready), .in_data(agg_in_data),
    .out_valid(agg_out_valid), .out_ready(agg_out_ready), .out_data(agg_out_data),
    .out_plane(), .out_plane_last(agg_plane_last), .out_last()
  );

  lz4_encoder #(.BLK_BYTES(PLANE_BYTES)) u_enc (
    .clk, .rst_n,
    .in_valid (agg_out_valid), .in_ready(agg_out_ready), .in_data(agg_out_data),
    .in_last  (agg_plane_last),
    .out_valid(enc_out_valid), .out_ready(enc_out_ready), .out_data(enc_out_data),
    .out_last (), .done(enc_done), .clen(enc_clen)
  );

  // header byte n: plane length entries first, then base exponents
  logic [LEN_W-1:0] hdr_len;
  logic [7:0]       hdr_byte;
  assign hdr_len  = lens[4'(NPLANES - 1) - hcnt[4:1]];
  assign hdr_byte = (hcnt < ADDR_W'(PLANE_HDR_BYTES)) ? (hcnt[0] ? hdr_len[15:8] : hdr_len[7:0])
                                                      : kvc_beta;

  always_comb begin
    mw_valid      = 1'b0;
    mw_addr       = '0;
    mw_data       = '0;
    enc_out_ready = 1'b0;
    if (state == W_BODY) begin
      mw_valid      = enc_out_valid;
      mw_addr       = cq.base + hdr_bytes + body_off;
      mw_data       = enc_out_data;
      enc_out_ready = mw_ready;
    end else if (state == W_HDR) begin
      mw_valid = 1'b1;
      mw_addr  = cq.base + hcnt;
      mw_data  = hdr_byte;
    end
  end

  // ----------------------------------------------------------------- read path
  logic              rq_on;
  logic [ADDR_W-1:0] rq_addr, rq_left;
  logic [FW-1:0]     credits;
  logic              fifo_valid, fifo_pop;
  logic [7:0]        fifo_data;
  logic              dec_start, dec_busy, dec_in_ready, dec_out_valid, dec_out_ready;
  logic              dec_out_last, dec_done, plane_open;
  logic [BEAT_W-1:0] dec_out_data;
  logic [4:0]        q;              // planes decoded in this read
  logic deag_out_valid, deag_out_ready, deag_out_last;
  logic [BEAT_W-1:0] deag_out_data;
  logic kvr_in_ready, kvr_out_valid, kvr_out_last;
  logic [BEAT_W-1:0] kvr_out_data;

  assign mr_req_valid = rq_on && (rq_left != '0) && (credits != '0);
  assign mr_req_addr  = rq_addr;

  sync_fifo #(.W(8), .DEPTH(FIFO_DEPTH)) u_rsp (
    .clk, .rst_n,
    .push(mr_resp_valid), .push_data(mr_resp_data),
    .pop (fifo_pop), .valid(fifo_valid), .data(fifo_data)
  );

  assign fifo_pop = (state == R_HDR) || (state == R_BODY && dec_in_ready);

  // sum of the compressed lengths of the K fetched planes
  logic [ADDR_W-1:0] top_sum;
  always_comb begin
    top_sum = '0;
    for (int e = 0; e < NPLANES; e++)
      if (5'(e) < cq.nplanes) top_sum = top_sum + ADDR_W'(lens[tp - 4'(e)]);
  end

  assign dec_start = (state == R_BODY) && !plane_open && !dec_busy;
  lz4_decoder #(.BLK_BYTES(PLANE_BYTES)) u_dec (
    .clk, .rst_n,
    .start    (dec_start), .clen(lens[tp - q[3:0]]), .busy(dec_busy),
    .in_valid (state == R_BODY && fifo_valid), .in_ready(dec_in_ready), .in_data(fifo_data),
    .out_valid(dec_out_valid), .out_ready(dec_out_ready), .out_data(dec_out_data),
    .out_last (dec_out_last), .done(dec_done)
  );

  bitplane_deaggregator #(.NVALS(NVALS)) u_deag (
    .clk, .rst_n, .fmt(cq.fmt),
    .in_valid (dec_out_valid), .in_ready(dec_out_ready), .in_data(dec_out_data),
    .in_plane (tp - q[3:0]),
    .in_last  (dec_out_last && (q == cq.nplanes - 1'b1)),
    .out_valid(deag_out_valid), .out_ready(deag_out_ready), .out_data(deag_out_data),
    .out_last (deag_out_last)
  );

  kv_restore #(.NTOK(NTOK), .NCH(NCH)) u_kvr (
    .clk, .rst_n,
    .beta_wr_en  (state == R_HDR && fifo_valid && hcnt >= ADDR_W'(PLANE_HDR_BYTES)),
    .beta_wr_idx (JW'(hcnt - ADDR_W'(PLANE_HDR_BYTES))),
    .beta_wr_data(fifo_data),
    .in_valid (is_kv && deag_out_valid), .in_ready(kvr_in_ready), .in_data(deag_out_data),
    .out_valid(kvr_out_valid), .out_ready(rdata_ready), .out_data(kvr_out_data),
    .out_last (kvr_out_last)
  );

  assign deag_out_ready = is_kv ? kvr_in_ready : rdata_ready;
  assign rdata_valid    = is_kv ? kvr_out_valid : deag_out_valid;
  assign rdata          = is_kv ? kvr_out_data : deag_out_data;
  assign rdata_last     = is_kv ? kvr_out_last : deag_out_last;

  // ------------------------------------------------------------------ control
  assign cmd_ready = (state == IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      cq         <= '0;
      pcnt       <= '0;
      win        <= '0;
      body_off   <= '0;
      hcnt       <= '0;
      body_total <= '0;
      rq_on      <= 1'b0;
      rq_addr    <= '0;
      rq_left    <= '0;
      credits    <= FW'(FIFO_DEPTH);
      plane_open <= 1'b0;
      q          <= '0;
      resp_valid <= 1'b0;
      resp_bytes <= '0;
      for (int p = 0; p < NPLANES; p++) lens[p] <= '0;
    end else begin
      resp_valid <= 1'b0;
      credits <= credits - FW'(mr_req_valid && mr_req_ready) + FW'(fifo_pop && fifo_valid);
      if (mr_req_valid && mr_req_ready) begin
        rq_addr <= rq_addr + 1'b1;
        rq_left <= rq_left - 1'b1;
      end
      unique case (state)
        IDLE: if (cmd_valid) begin
          cq       <= '{kind: cmd.kind, fmt: cmd.fmt, base: cmd.base, nplanes: cmd.nplanes};
          pcnt     <= '0;
          win      <= '0;
          body_off <= '0;
          hcnt     <= '0;
          q        <= '0;
          if (cmd.op == OP_WRITE) begin
            state <= W_BODY;
            // planes a narrow format does not have are stored as length 0
            for (int p = 0; p < NPLANES; p++) lens[p] <= '0;
          end else begin
            state   <= R_HDR;
            rq_on   <= 1'b1;
            rq_addr <= cmd.base;
            rq_left <= ADDR_W'(PLANE_HDR_BYTES) + ((cmd.kind == KIND_KV) ? ADDR_W'(NCH) : '0);
          end
        end
        W_BODY: begin
          if (wdata_valid && wdata_ready) win <= win + 1'b1;
          if (mw_valid && mw_ready) body_off <= body_off + 1'b1;
          if (enc_done) begin
            lens[tp - pcnt[3:0]] <= enc_clen;
            pcnt <= pcnt + 1'b1;
            if (pcnt == npl - 1'b1) begin
              state <= W_HDR;
              hcnt  <= '0;
            end
          end
        end
        W_HDR: if (mw_ready) begin
          hcnt <= hcnt + 1'b1;
          if (hcnt == hdr_bytes - 1'b1) begin
            state      <= RESP;
            resp_bytes <= hdr_bytes + body_off;
          end
        end
        R_HDR: if (fifo_valid) begin
          hcnt <= hcnt + 1'b1;
          if (hcnt < ADDR_W'(PLANE_HDR_BYTES)) begin
            if (hcnt[0]) lens[4'(NPLANES - 1) - hcnt[4:1]][15:8] <= fifo_data;
            else         lens[4'(NPLANES - 1) - hcnt[4:1]][7:0]  <= fifo_data;
          end
          if (hcnt == hdr_bytes - 1'b1) state <= R_BODY;
        end
        R_BODY: begin
          if (rq_left == '0 && !plane_open && q == '0 && body_total == '0) begin
            // header complete: fetch the first K compressed planes in one range
            body_total <= top_sum;
            rq_addr    <= cq.base + hdr_bytes;
            rq_left    <= top_sum;
          end
          if (dec_start) plane_open <= 1'b1;
          if (dec_done) begin
            plane_open <= 1'b0;
            q          <= q + 1'b1;
            if (q == cq.nplanes - 1'b1) begin
              state <= R_OUT;
              rq_on <= 1'b0;
            end
          end
        end
        R_OUT: if (rdata_valid && rdata_ready && rdata_last) begin
          state      <= RESP;
          resp_bytes <= hdr_bytes + body_total;
          body_total <= '0;
        end
        RESP: begin
          resp_valid <= 1'b1;
          state      <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_nplanes: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready && cmd.op == OP_READ)
      |-> (cmd.nplanes >= 5'd1 && cmd.nplanes <= 5'(NPLANES >> fmt_shift(cmd.fmt))));
  a_kv_bf16: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready && cmd.kind == KIND_KV) |-> (cmd.fmt == FMT_BF16));
endmodule
