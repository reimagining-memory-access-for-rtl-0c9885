// End-to-end testbench for cmc_top at reduced size (4 lanes, 32 tokens x 64
// channels = 2048-value blocks, 256-byte planes), each lane with its own
// behavioural DRAM (random stalls, 8-cycle latency). All lanes run at once:
//   lane 0: weights, write then read with 16 and 8 planes
//   lane 1: KV cache, write then read with 16 and 4 planes
//   lane 2: weights, write then read with 16 planes and 1 plane
//   lane 3: KV cache, write then read with 16 and 12 planes
// then lane 0 stores an INT4 weight block (read with 4 and 2 planes) and lane
// 2 an FP8 one (read with 8 and 5 planes): the element-format switch.
// Every read is compared with the written block, reduced to the precision
// read (for KV: exponent = base + truncated delta), and every resp_bytes with
// the DRAM's byte count. The mechanisms of the design are counted and each
// must occur: weight and KV writes, full and partial (dynamic-precision)
// reads, DRAM write stalls, read throttling by the response-FIFO credits,
// host backpressure, LZ4 matches, literal- and match-length extension bytes
// decoder match copies and narrow-format (FP8/INT4) blocks.
module tb_cmc_top;
  import cmc_pkg::*;
  localparam int LANES = 4;
  localparam int NTOK  = 32;
  localparam int NCH   = 64;
  localparam int NVALS = NTOK * NCH;
  localparam int WATCHDOG = 200000;

  logic clk = 1'b0, rst_n = 1'b1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic              cmd_valid [LANES], cmd_ready [LANES];
  cmd_t              cmd [LANES];
  logic              wdata_valid [LANES], wdata_ready [LANES];
  logic [BEAT_W-1:0] wdata [LANES], rdata [LANES];
  logic              rdata_valid [LANES], rdata_ready [LANES], rdata_last [LANES];
  logic              resp_valid [LANES];
  logic [ADDR_W-1:0] resp_bytes [LANES];
  logic              mw_valid [LANES], mw_ready [LANES];
  logic [ADDR_W-1:0] mw_addr [LANES], mr_req_addr [LANES];
  logic [7:0]        mw_data [LANES], mr_resp_data [LANES];
  logic              mr_req_valid [LANES], mr_req_ready [LANES], mr_resp_valid [LANES];

  cmc_top #(.LANES(LANES), .NVALS(NVALS), .NTOK(NTOK), .NCH(NCH)) dut (.*);

  // mechanism counters
  typedef enum int {M_WR_W, M_WR_KV, M_RD_FULL, M_RD_PART, M_MW_STALL, M_CREDIT_STALL,
                    M_HOST_BP, M_LZ_MATCH, M_LZ_LLEXT, M_LZ_MLEXT, M_DEC_COPY, M_NARROW, M_N} mech_e;
  int mech [M_N];
  string mech_name [M_N] = '{"weight write", "KV write", "full read", "partial read",
                             "DRAM write stall", "read credit stall", "host backpressure",
                             "LZ4 match", "literal length ext", "match length ext",
                             "decoder match copy", "FP8/INT4 block"};

  longint bytes_w [LANES], bytes_r [LANES];
  logic [15:0] blk [LANES][NVALS];
  logic [7:0]  bmin [LANES][NCH];

  for (genvar n = 0; n < LANES; n++) begin : g_env
    dram_model #(.LATENCY(8), .STALL_PCT(20)) u_mem (
      .clk, .mw_valid(mw_valid[n]), .mw_ready(mw_ready[n]), .mw_addr(mw_addr[n]),
      .mw_data(mw_data[n]), .mr_req_valid(mr_req_valid[n]), .mr_req_ready(mr_req_ready[n]),
      .mr_req_addr(mr_req_addr[n]), .mr_resp_valid(mr_resp_valid[n]),
      .mr_resp_data(mr_resp_data[n]));
    always @(posedge clk) begin
      bytes_w[n] = u_mem.bytes_written;
      bytes_r[n] = u_mem.bytes_read;
      if (mw_valid[n] && !mw_ready[n]) mech[M_MW_STALL]++;
      if (dut.g_lane[n].u_lane.rq_on && dut.g_lane[n].u_lane.rq_left != 0 &&
          dut.g_lane[n].u_lane.credits == 0) mech[M_CREDIT_STALL]++;
      if (rdata_valid[n] && !rdata_ready[n]) mech[M_HOST_BP]++;
      // encoder states 6 (offset byte 0), 4 (literal ext), 8 (match ext)
      if (dut.g_lane[n].u_lane.u_enc.out_valid && dut.g_lane[n].u_lane.u_enc.out_ready) begin
        if (int'(dut.g_lane[n].u_lane.u_enc.state) == 6) mech[M_LZ_MATCH]++;
        if (int'(dut.g_lane[n].u_lane.u_enc.state) == 4) mech[M_LZ_LLEXT]++;
        if (int'(dut.g_lane[n].u_lane.u_enc.state) == 8) mech[M_LZ_MLEXT]++;
      end
      if (int'(dut.g_lane[n].u_lane.u_dec.state) == 7 && dut.g_lane[n].u_lane.u_dec.prod)
        mech[M_DEC_COPY]++;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input int n, input op_e op, input kind_e kind, input int unsigned base, input int np,
                       input fmt_e f);
    @(negedge clk);
    cmd_valid[n] = 1;
    cmd[n] = '{op: op, kind: kind, fmt: f, base: base, nplanes: 5'(np)};
    @(posedge clk);
    while (!cmd_ready[n]) @(posedge clk);
    @(negedge clk);
    cmd_valid[n] = 0;
  endtask

  task automatic wait_resp(input int n, output int unsigned r);
    while (!resp_valid[n]) @(posedge clk);
    r = resp_bytes[n];
    @(negedge clk);
  endtask

  task automatic fill_block(input int n, input kind_e kind, input fmt_e f);
    if (f == FMT_FP8) begin
      for (int v = 0; v < NVALS; v++) blk[n][v] = {8'd0, 1'($urandom), 4'($urandom_range(3, 6)), 3'($urandom)};
    end else if (f == FMT_INT4) begin
      for (int v = 0; v < NVALS; v++) blk[n][v] = 16'($urandom_range(0, 15));
    end else if (kind == KIND_WEIGHT) begin
      for (int v = 0; v < NVALS; v++)
        blk[n][v] = {1'($urandom), 8'($urandom_range(115, 124)), 7'($urandom)};
    end else begin
      for (int j = 0; j < NCH; j++) begin
        int centre;
        centre = $urandom_range(110, 130);
        bmin[n][j] = 8'hFF;
        for (int t = 0; t < NTOK; t++) begin
          logic [7:0] e;
          e = 8'(centre + $urandom_range(0, 2));
          blk[n][t*NCH + j] = {1'($urandom), e, 7'($urandom)};
          if (e < bmin[n][j]) bmin[n][j] = e;
        end
      end
    end
  endtask

  task automatic do_write(input int n, input kind_e kind, input int unsigned base,
                          input fmt_e f = FMT_BF16);
    longint w0;
    int unsigned r;
    int ew, epb;
    ew  = 16 >> fmt_shift(f);
    epb = 256 / ew;
    w0 = bytes_w[n];
    fill_block(n, kind, f);
    issue(n, OP_WRITE, kind, base, 16, f);
    for (int b = 0; b < NVALS / epb; b++) begin
      wdata_valid[n] = 1;
      for (int k = 0; k < epb; k++)
        for (int i = 0; i < ew; i++) wdata[n][k*ew + i] = blk[n][b*epb + k][i];
      @(posedge clk);
      while (!wdata_ready[n]) @(posedge clk);
      @(negedge clk);
    end
    wdata_valid[n] = 0;
    wait_resp(n, r);
    @(negedge clk);
    check(longint'(r) == bytes_w[n] - w0, $sformatf("lane %0d write resp_bytes", n));
    mech[kind == KIND_KV ? M_WR_KV : M_WR_W]++;
    if (f != FMT_BF16) mech[M_NARROW]++;
  endtask

  function automatic logic [15:0] expect_val(input int n, input kind_e kind, input int v, input int np,
                                             input int ew);
    logic [15:0] mask, x;
    mask = 16'(((1 << ew) - 1) & ~((1 << (ew - np)) - 1));
    x = blk[n][v];
    if (kind == KIND_WEIGHT) return x & mask;
    begin
      logic [7:0] d;
      d = 8'((x[14:7] - bmin[n][v % NCH]) & mask[14:7]);
      return {x[15] & mask[15], 8'(d + bmin[n][v % NCH]), x[6:0] & mask[6:0]};
    end
  endfunction

  task automatic do_read(input int n, input kind_e kind, input int unsigned base, input int np,
                         input fmt_e f = FMT_BF16);
    longint r0;
    int unsigned r;
    int beat, bad, ew, epb;
    ew  = 16 >> fmt_shift(f);
    epb = 256 / ew;
    r0 = bytes_r[n];
    issue(n, OP_READ, kind, base, np, f);
    beat = 0;
    bad = 0;
    while (beat < NVALS / epb) begin
      rdata_ready[n] = 1'($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (rdata_valid[n] && rdata_ready[n]) begin
        for (int k = 0; k < epb; k++) begin
          logic [15:0] g;
          g = '0;
          for (int i = 0; i < ew; i++) g[i] = rdata[n][k*ew + i];
          if (g != expect_val(n, kind, beat*epb + k, np, ew)) bad++;
        end
        beat++;
      end
      @(negedge clk);
    end
    rdata_ready[n] = 0;
    check(bad == 0, $sformatf("lane %0d read K=%0d: %0d wrong values", n, np, bad));
    wait_resp(n, r);
    @(negedge clk);
    check(longint'(r) == bytes_r[n] - r0, $sformatf("lane %0d read resp_bytes", n));
    mech[np == ew ? M_RD_FULL : M_RD_PART]++;
  endtask

  task automatic lane_seq(input int n);
    kind_e kind;
    int k1;
    kind = (n % 2 == 1) ? KIND_KV : KIND_WEIGHT;
    k1 = (n == 0) ? 8 : (n == 1) ? 4 : (n == 2) ? 1 : 12;
    do_write(n, kind, 32'h100 * n);
    do_read(n, kind, 32'h100 * n, 16);
    do_read(n, kind, 32'h100 * n, k1);
    if (n == 0) begin
      do_write(n, KIND_WEIGHT, 32'h8000, FMT_INT4);
      do_read(n, KIND_WEIGHT, 32'h8000, 4, FMT_INT4);
      do_read(n, KIND_WEIGHT, 32'h8000, 2, FMT_INT4);
    end else if (n == 2) begin
      do_write(n, KIND_WEIGHT, 32'h8000, FMT_FP8);
      do_read(n, KIND_WEIGHT, 32'h8000, 8, FMT_FP8);
      do_read(n, KIND_WEIGHT, 32'h8000, 5, FMT_FP8);
    end
  endtask

  initial begin
    for (int n = 0; n < LANES; n++) begin
      cmd_valid[n] = 0; cmd[n] = '0; wdata_valid[n] = 0; wdata[n] = '0; rdata_ready[n] = 0;
    end
    foreach (mech[m]) mech[m] = 0;
    #0.5 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < LANES; n++) begin
      automatic int nn = n;
      fork
        lane_seq(nn);
      join_none
    end
    wait fork;
    for (int m = 0; m < M_N; m++) begin
      $display("mechanism %-20s : %0d", mech_name[m], mech[m]);
      check(mech[m] > 0, $sformatf("mechanism '%s' exercised", mech_name[m]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
