// Testbench for lz4_decoder: LZ4 blocks are produced by the reference encoder
// of this testbench (brute-force longest match, not the hardware encoder) from
// planes of five kinds; they cover long literal runs, long overlapping matches
// (offset 1 over runs of zeros) and short matches. Each block is fed with
// random input gaps and output backpressure; the packed 256-bit output words
// must equal the plane, out_last must mark the last word, done must pulse,
// and with no gaps a literal byte costs one cycle.
module tb_lz4_decoder;
  import cmc_pkg::*;
  typedef byte unsigned bytes_t[$];
  localparam int BLK = 1024;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, in_valid, in_ready, out_valid, out_ready, out_last, done;
  logic [15:0]  clen;
  logic [7:0]   in_data;
  logic [255:0] out_data;

  lz4_decoder #(.BLK_BYTES(BLK)) dut (.*);
  lz4_ref u_ref ();

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bytes_t d, c;
  int     words_seen, done_seen;
  bit     gaps;

  // output side: collect and compare words
  always @(posedge clk) begin
    if (done) done_seen++;
    if (out_valid && out_ready) begin
      logic [255:0] exp_w;
      for (int k = 0; k < 32; k++) exp_w[k*8 +: 8] = d[words_seen*32 + k];
      check(out_data == exp_w, $sformatf("word %0d", words_seen));
      check(out_last == (words_seen == BLK / 32 - 1), "out_last");
      words_seen++;
    end
  end
  always @(negedge clk) out_ready <= gaps ? 1'($urandom_range(0, 1)) : 1'b1;

  initial begin
    start = 0; clen = '0; in_valid = 0; in_data = '0; gaps = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 10; r++) begin
      int t0;
      d = u_ref.make_plane(r % 5, BLK);
      c = u_ref.lz4_ref_encode(d, 64);
      gaps = (r >= 5);
      words_seen = 0;
      done_seen = 0;
      @(negedge clk);
      start = 1; clen = 16'(c.size());
      @(negedge clk);
      start = 0;
      t0 = $time;
      for (int p = 0; p < c.size(); p++) begin
        while (gaps && $urandom_range(0, 3) == 0) @(negedge clk);
        in_valid = 1;
        in_data  = c[p];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
        in_valid = 0;
      end
      if (r == 1) check(($time - t0) / 2 <= c.size() + BLK / 32 + 4,
                        "random plane: about one literal per cycle");
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);
      check(words_seen == BLK / 32, $sformatf("plane kind %0d: %0d words", r % 5, words_seen));
      check(done_seen == 1, "one done pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
