// Workload testbench: one full-size lane (cmc_lane with its defaults: 32768-
// value blocks, 32 tokens x 1024 channels, 4 KB planes) running the dynamic
// quantization schemes evaluated for this design.
//   * A weight block drawn from a zero-mean bell-shaped distribution (sum of
//     four uniforms, standard deviation about 0.02, converted to BF16 by
//     truncation) is stored, then read at BF16, FP12, FP8, FP6 and FP4, i.e.
//     16, 12, 8, 6 and 4 planes.
//   * A KV block whose channels each have their own magnitude (log-uniform)
//     and sign, with +/-30% variation across the 32 tokens, is stored and read
//     at BF16, FP8 and FP4 (16, 8, 4 planes).
//   * Weights of models already quantized before storage: an FP8 (e4m3)
//     block from the same distribution scaled by 64 (to suit the e4m3
//     range), read with 8 and 4 planes, and an
//     INT4 block (values 0..15 clustered around 8), read with 4 and 2 planes.
// Every read is compared with the stored block truncated to the precision
// read (for KV: exponent = base + truncated delta). Checked: resp_bytes equals
// the DRAM's byte count, read traffic equals header + the top-K compressed
// plane lengths, traffic falls strictly as K falls, the BF16 blocks are stored
// in fewer bytes than raw, and the FP8/INT4 blocks grow by under 1.6% at
// most. Ratios and traffic are printed. The data are
// synthetic stand-ins, not real model tensors.
module tb_workload_dynquant;
  import cmc_pkg::*;
  localparam int NTOK  = 32;
  localparam int NCH   = 1024;
  localparam int NVALS = NTOK * NCH;

  logic clk = 1'b0, rst_n = 1'b1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, wdata_valid, wdata_ready, rdata_valid, rdata_ready, rdata_last;
  cmd_t cmd;
  logic [BEAT_W-1:0] wdata, rdata;
  logic resp_valid;
  logic [ADDR_W-1:0] resp_bytes, mw_addr, mr_req_addr;
  logic mw_valid, mw_ready, mr_req_valid, mr_req_ready, mr_resp_valid;
  logic [7:0] mw_data, mr_resp_data;

  cmc_lane dut (.*);
  dram_model #(.LATENCY(8), .STALL_PCT(5)) u_mem (.*);

  logic [15:0] blk [NVALS];
  logic [7:0]  bmin [NCH];
  int unsigned last_resp;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // real -> BF16 by truncation, computed from the IEEE double encoding
  function automatic logic [15:0] to_bf16(input real x);
    logic [63:0] d;
    int e;
    d = $realtobits(x);
    e = int'(d[62:52]) - 1023 + 127;
    if (x == 0.0 || e <= 0) return {d[63], 15'd0};
    return {d[63], 8'(e), d[51:45]};
  endfunction

  function automatic real urand();
    return real'($urandom) / 4294967296.0;
  endfunction

  fmt_e cur_fmt = FMT_BF16;

  // real -> FP8 e4m3 (bias 7) by truncation; tiny values flush to zero
  function automatic logic [15:0] to_fp8(input real x);
    logic [63:0] d;
    int e;
    d = $realtobits(x);
    e = int'(d[62:52]) - 1023 + 7;
    if (x == 0.0 || e <= 0) return {8'd0, d[63], 7'd0};
    if (e > 15) e = 15;
    return {8'd0, d[63], 4'(e), d[51:49]};
  endfunction

  task automatic issue(input op_e op, input kind_e kind, input int np);
    @(negedge clk);
    cmd_valid = 1;
    cmd = '{op: op, kind: kind, fmt: cur_fmt, base: '0, nplanes: 5'(np)};
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic wait_resp();
    while (!resp_valid) @(posedge clk);
    last_resp = resp_bytes;
    @(negedge clk);
  endtask

  task automatic do_write(input kind_e kind);
    longint w0;
    int ew, epb;
    w0  = u_mem.bytes_written;
    ew  = 16 >> fmt_shift(cur_fmt);
    epb = 256 / ew;
    issue(OP_WRITE, kind, 16);
    for (int b = 0; b < NVALS / epb; b++) begin
      wdata_valid = 1;
      for (int k = 0; k < epb; k++)
        for (int i = 0; i < ew; i++) wdata[k*ew + i] = blk[b*epb + k][i];
      @(posedge clk);
      while (!wdata_ready) @(posedge clk);
      @(negedge clk);
    end
    wdata_valid = 0;
    wait_resp();
    check(last_resp == u_mem.bytes_written - w0, "write resp_bytes = bytes written");
  endtask

  function automatic logic [15:0] expect_val(input kind_e kind, input int v, input int np);
    logic [15:0] mask, x;
    logic [7:0]  d;
    int ew;
    ew   = 16 >> fmt_shift(cur_fmt);
    mask = 16'(((1 << ew) - 1) & ~((1 << (ew - np)) - 1));
    x = blk[v];
    if (kind == KIND_WEIGHT) return x & mask;
    d = 8'((x[14:7] - bmin[v % NCH]) & mask[14:7]);
    return {x[15] & mask[15], 8'(d + bmin[v % NCH]), x[6:0] & mask[6:0]};
  endfunction

  function automatic int hdr_sum(input int np);
    int s = 0;
    int first;
    first = 16 - (16 >> fmt_shift(cur_fmt));   // header slot of the format's top plane
    for (int e = first; e < first + np; e++)
      s += int'(u_mem.peek(2*e)) | (int'(u_mem.peek(2*e + 1)) << 8);
    return s;
  endfunction

  task automatic do_read(input kind_e kind, input int np);
    longint r0;
    int n, bad, ew, epb;
    ew  = 16 >> fmt_shift(cur_fmt);
    epb = 256 / ew;
    r0 = u_mem.bytes_read;
    issue(OP_READ, kind, np);
    n = 0;
    bad = 0;
    rdata_ready = 1;
    while (n < NVALS / epb) begin
      @(posedge clk);
      if (rdata_valid) begin
        for (int k = 0; k < epb; k++) begin
          logic [15:0] g;
          g = '0;
          for (int i = 0; i < ew; i++) g[i] = rdata[k*ew + i];
          if (g != expect_val(kind, n*epb + k, np)) bad++;
        end
        n++;
      end
    end
    @(negedge clk);
    rdata_ready = 0;
    check(bad == 0, $sformatf("%s read with %0d planes: %0d wrong values",
                              kind == KIND_KV ? "KV" : "weight", np, bad));
    wait_resp();
    check(last_resp == u_mem.bytes_read - r0, "read resp_bytes = bytes read");
  endtask

  initial begin
    int wk [5] = '{16, 12, 8, 6, 4};
    int kk [3] = '{16, 8, 4};
    string wn [5] = '{"BF16", "FP12", "FP8", "FP6", "FP4"};
    int unsigned stored, prev, hdr;
    cmd_valid = 0; cmd = '0; wdata_valid = 0; wdata = '0; rdata_ready = 0;
    #0.5 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- weights
    for (int v = 0; v < NVALS; v++)
      blk[v] = to_bf16(0.02 * 1.732 * (urand() + urand() + urand() + urand() - 2.0));
    do_write(KIND_WEIGHT);
    stored = last_resp;
    check(stored < 2 * NVALS, "weight block compresses");
    $display("weights: %0d B stored for %0d B raw, ratio %.3f", stored, 2 * NVALS,
             real'(2 * NVALS) / real'(stored));
    prev = 0;
    foreach (wk[i]) begin
      do_read(KIND_WEIGHT, wk[i]);
      check(last_resp == 32 + hdr_sum(wk[i]), "traffic = header + top-K planes");
      if (i > 0) check(last_resp < prev, "traffic falls with precision");
      $display("weights read as %-4s (%2d planes): %0d B, %.1f%% of a full read", wn[i], wk[i],
               last_resp, 100.0 * real'(last_resp) / real'(stored));
      prev = last_resp;
    end

    // ---------------- KV cache
    for (int j = 0; j < NCH; j++) begin
      real mag;
      bit  neg;
      mag = 0.01 * (2.0 ** (urand() * 8.0));
      neg = 1'($urandom);
      bmin[j] = 8'hFF;
      for (int t = 0; t < NTOK; t++) begin
        real x;
        x = mag * (1.0 + 0.3 * (2.0 * urand() - 1.0));
        blk[t*NCH + j] = to_bf16(neg ? -x : x);
        if (blk[t*NCH + j][14:7] < bmin[j]) bmin[j] = blk[t*NCH + j][14:7];
      end
    end
    do_write(KIND_KV);
    stored = last_resp;
    hdr = 32 + NCH;
    check(stored < 2 * NVALS, "KV block compresses");
    $display("KV: %0d B stored (incl. %0d B header) for %0d B raw, ratio %.3f", stored, hdr,
             2 * NVALS, real'(2 * NVALS) / real'(stored));
    prev = 0;
    foreach (kk[i]) begin
      do_read(KIND_KV, kk[i]);
      check(last_resp == hdr + hdr_sum(kk[i]), "KV traffic = header + top-K planes");
      if (i > 0) check(last_resp < prev, "KV traffic falls with precision");
      $display("KV read with %2d planes: %0d B", kk[i], last_resp);
      prev = last_resp;
    end

    // ---------------- FP8 and INT4 models
    cur_fmt = FMT_FP8;
    for (int v = 0; v < NVALS; v++)
      blk[v] = to_fp8(0.02 * 1.732 * (urand() + urand() + urand() + urand() - 2.0) * 64.0);
    do_write(KIND_WEIGHT);
    stored = last_resp;
    check(stored <= NVALS + NVALS / 64, "FP8 block expands by under 1.6%");
    $display("FP8 weights: %0d B stored for %0d B raw, ratio %.3f", stored, NVALS,
             real'(NVALS) / real'(stored));
    do_read(KIND_WEIGHT, 8);
    check(last_resp == stored, "FP8 full read moves the stored block");
    do_read(KIND_WEIGHT, 4);
    check(last_resp == 32 + hdr_sum(4) && last_resp < stored, "FP8 4-plane read moves top 4 planes");
    $display("FP8 weights read with 4 planes: %0d B", last_resp);
    cur_fmt = FMT_INT4;
    for (int v = 0; v < NVALS; v++)
      blk[v] = 16'(int'(8.0 + 2.0 * 1.732 * (urand() + urand() + urand() + urand() - 2.0)) & 15);
    do_write(KIND_WEIGHT);
    stored = last_resp;
    $display("INT4 weights: %0d B stored for %0d B raw, ratio %.3f", stored, NVALS / 2,
             real'(NVALS / 2) / real'(stored));
    check(stored <= NVALS / 2 + NVALS / 128, "INT4 block expands by under 1.6%");
    do_read(KIND_WEIGHT, 4);
    check(last_resp == stored, "INT4 full read moves the stored block");
    do_read(KIND_WEIGHT, 2);
    check(last_resp == 32 + hdr_sum(2) && last_resp < stored, "INT4 2-plane read moves top 2 planes");
    $display("INT4 weights read with 2 planes: %0d B", last_resp);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
