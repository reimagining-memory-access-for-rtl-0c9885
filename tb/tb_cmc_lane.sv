// Testbench for cmc_lane with a behavioural DRAM (random stalls, 8-cycle read
// latency). Sequence: write a BF16 weight block, read it with all 16 planes
// (must match exactly), with 8 and with 3 planes (must match the values with
// the low bits cleared); write a KV block of correlated channels, read it
// with 16 planes (exact) and with 9 planes (exponent restored as beta + the
// truncated delta, fraction cleared, all worked out here). Also checks the
// header in memory (plane lengths add up to the body, base exponents equal the
// channel minima), that resp_bytes equals the bytes the DRAM saw, that a
// partial read moves fewer bytes than a full one, that the KV block is stored
// smaller than its raw 4 KB, and that results arrive with rdata backpressure.
// Then an FP8 weight block (8-bit elements, 32 per beat) is read with 8 and 5
// planes and an INT4 block (4-bit elements, 64 per beat) with 4 and 2 planes;
// their headers must hold 0 for the planes the format lacks.
module tb_cmc_lane;
  import cmc_pkg::*;
  localparam int NTOK  = 32;
  localparam int NCH   = 64;
  localparam int NVALS = NTOK * NCH;

  logic clk = 1'b0, rst_n = 1'b1;   // falls at 0.5 ns: a reset edge before the first clock
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, wdata_valid, wdata_ready, rdata_valid, rdata_ready, rdata_last;
  cmd_t cmd;
  logic [255:0] wdata, rdata;
  logic resp_valid;
  logic [ADDR_W-1:0] resp_bytes;
  logic mw_valid, mw_ready, mr_req_valid, mr_req_ready, mr_resp_valid;
  logic [ADDR_W-1:0] mw_addr, mr_req_addr;
  logic [7:0] mw_data, mr_resp_data;

  cmc_lane #(.NVALS(NVALS), .NTOK(NTOK), .NCH(NCH)) dut (.*);
  dram_model #(.LATENCY(8), .STALL_PCT(20)) u_mem (.*);

  logic [15:0] blk [NVALS];      // block in host order
  logic [15:0] got [NVALS];
  int unsigned last_resp;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input op_e op, input kind_e kind, input int unsigned base, input int np,
                       input fmt_e f);
    @(negedge clk);
    cmd_valid = 1;
    cmd = '{op: op, kind: kind, fmt: f, base: base, nplanes: 5'(np)};
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

  task automatic do_write(input kind_e kind, input int unsigned base, input fmt_e f = FMT_BF16);
    longint w0;
    int ew, epb;
    ew  = 16 >> fmt_shift(f);
    epb = 256 / ew;
    w0 = u_mem.bytes_written;
    issue(OP_WRITE, kind, base, 16, f);
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

  task automatic do_read(input kind_e kind, input int unsigned base, input int np,
                         input fmt_e f = FMT_BF16);
    longint r0;
    int n, ew, epb;
    ew  = 16 >> fmt_shift(f);
    epb = 256 / ew;
    r0 = u_mem.bytes_read;
    issue(OP_READ, kind, base, np, f);
    n = 0;
    while (n < NVALS / epb) begin
      rdata_ready = 1'($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (rdata_valid && rdata_ready) begin
        for (int k = 0; k < epb; k++) begin
          got[n*epb + k] = '0;
          for (int i = 0; i < ew; i++) got[n*epb + k][i] = rdata[k*ew + i];
        end
        check(rdata_last == (n == NVALS / epb - 1), "rdata_last");
        n++;
      end
      @(negedge clk);
    end
    rdata_ready = 0;
    wait_resp();
    check(last_resp == u_mem.bytes_read - r0, "read resp_bytes = bytes read");
  endtask

  function automatic int hdr_sum(input int unsigned base, input int np);
    int s = 0;
    for (int e = 0; e < np; e++)
      s += int'(u_mem.peek(base + 2*e)) | (int'(u_mem.peek(base + 2*e + 1)) << 8);
    return s;
  endfunction

  initial begin
    int unsigned full_w, full_kv, rd16, rd8;
    logic [7:0] bmin [NCH];
    cmd_valid = 0; cmd = '0; wdata_valid = 0; wdata = '0; rdata_ready = 0;
    #0.5 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- weights: BF16 values of small magnitude, as trained weights are
    for (int v = 0; v < NVALS; v++)
      blk[v] = {1'($urandom), 8'($urandom_range(115, 124)), 7'($urandom)};
    do_write(KIND_WEIGHT, 32'h0000_1000);
    full_w = last_resp;
    check(hdr_sum(32'h1000, 16) + 32 == full_w, "weight header lengths add up");
    do_read(KIND_WEIGHT, 32'h1000, 16);
    rd16 = last_resp;
    check(rd16 == full_w, "full read moves the whole stored block");
    for (int v = 0; v < NVALS; v++) check(got[v] == blk[v], $sformatf("weight %0d K=16", v));
    do_read(KIND_WEIGHT, 32'h1000, 8);
    rd8 = last_resp;
    check(rd8 == 32 + hdr_sum(32'h1000, 8), "K=8 read moves header + top 8 planes");
    check(rd8 < rd16, "partial read moves fewer bytes");
    for (int v = 0; v < NVALS; v++) check(got[v] == (blk[v] & 16'hFF00), $sformatf("weight %0d K=8", v));
    do_read(KIND_WEIGHT, 32'h1000, 3);
    for (int v = 0; v < NVALS; v++) check(got[v] == (blk[v] & 16'hE000), $sformatf("weight %0d K=3", v));

    // ---- KV: token t channel j, exponents close to a per-channel centre
    for (int j = 0; j < NCH; j++) begin
      int centre;
      centre = $urandom_range(110, 130);
      bmin[j] = 8'hFF;
      for (int t = 0; t < NTOK; t++) begin
        logic [7:0] e;
        e = 8'(centre + $urandom_range(0, 2));
        blk[t*NCH + j] = {1'($urandom), e, 7'($urandom)};
        if (e < bmin[j]) bmin[j] = e;
      end
    end
    do_write(KIND_KV, 32'h0002_0000);
    full_kv = last_resp;
    check(hdr_sum(32'h20000, 16) + 32 + NCH == full_kv, "KV header lengths add up");
    for (int j = 0; j < NCH; j++) check(u_mem.peek(32'h20000 + 32 + j) == bmin[j], "stored base exponent");
    check(full_kv < 2 * NVALS, $sformatf("KV block stored in %0d of %0d bytes", full_kv, 2 * NVALS));
    do_read(KIND_KV, 32'h20000, 16);
    for (int v = 0; v < NVALS; v++) check(got[v] == blk[v], $sformatf("kv %0d K=16", v));
    do_read(KIND_KV, 32'h20000, 9);
    for (int v = 0; v < NVALS; v++) begin
      logic [15:0] x;
      logic [7:0]  d;
      x = blk[v];
      d = (x[14:7] - bmin[v % NCH]) & 8'hFF;   // 9 planes keep sign + all 8 delta bits
      x = {x[15], 8'(d + bmin[v % NCH]), 7'd0};
      check(got[v] == x, $sformatf("kv %0d K=9", v));
    end

    // ---- FP8 weights (e4m3-like bytes) and INT4 weights
    for (int v = 0; v < NVALS; v++) blk[v] = {8'd0, 1'($urandom), 4'($urandom_range(3, 6)), 3'($urandom)};
    do_write(KIND_WEIGHT, 32'h0004_0000, FMT_FP8);
    check(hdr_sum(32'h40000, 8) == 0, "FP8 header: no planes 15..8");
    check(32 + hdr_sum(32'h40000, 16) == last_resp, "FP8 header lengths add up");
    full_w = last_resp;
    do_read(KIND_WEIGHT, 32'h40000, 8, FMT_FP8);
    check(last_resp == full_w, "FP8 full read moves the whole block");
    for (int v = 0; v < NVALS; v++) check(got[v] == blk[v], $sformatf("fp8 %0d K=8", v));
    do_read(KIND_WEIGHT, 32'h40000, 5, FMT_FP8);
    check(last_resp < full_w, "FP8 partial read moves fewer bytes");
    for (int v = 0; v < NVALS; v++) check(got[v] == (blk[v] & 16'h00F8), $sformatf("fp8 %0d K=5", v));
    for (int v = 0; v < NVALS; v++) blk[v] = 16'($urandom_range(0, 15));
    do_write(KIND_WEIGHT, 32'h0006_0000, FMT_INT4);
    check(hdr_sum(32'h60000, 12) == 0, "INT4 header: no planes 15..4");
    full_w = last_resp;
    do_read(KIND_WEIGHT, 32'h60000, 4, FMT_INT4);
    check(last_resp == full_w, "INT4 full read moves the whole block");
    for (int v = 0; v < NVALS; v++) check(got[v] == blk[v], $sformatf("int4 %0d K=4", v));
    do_read(KIND_WEIGHT, 32'h60000, 2, FMT_INT4);
    for (int v = 0; v < NVALS; v++) check(got[v] == (blk[v] & 16'h000C), $sformatf("int4 %0d K=2", v));

    $display("lane: BF16 weight block %0d B, KV block %0d B (raw %0d B); K=16 read %0d B, K=8 read %0d B; stalls w=%0d r=%0d",
             rd16, full_kv, 2 * NVALS, rd16, rd8, u_mem.write_stalls, u_mem.read_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
