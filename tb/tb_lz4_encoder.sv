// Testbench for lz4_encoder: planes of five kinds (all zero, random, noisy
// repeating pattern, sparse, long runs) are compressed. The output is parsed
// by an independent reference LZ4 decoder and must give back the plane
// exactly; clen must equal the bytes emitted, out_last must mark the final
// byte, an all-zero plane must shrink below 40 bytes, a random one may grow by
// at most the LZ4 literal overhead, and the input is taken at one word per
// cycle. Random output backpressure is applied on every other plane.
module tb_lz4_encoder;
  import cmc_pkg::*;
  typedef byte unsigned bytes_t[$];
  lz4_ref u_ref ();
  localparam int BLK = 1024;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last, done;
  logic [255:0] in_data;
  logic [7:0]   out_data;
  logic [15:0]  clen;

  lz4_encoder #(.BLK_BYTES(BLK)) dut (.*);

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

  initial begin
    in_valid = 0; in_data = '0; in_last = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 10; r++) begin
      bytes_t d, c, o;
      bit err, seen_last;
      int t0, kind;
      kind = r % 5;
      d = u_ref.make_plane(kind, BLK);
      @(negedge clk);
      t0 = $time;
      for (int w = 0; w < BLK / 32; w++) begin
        in_valid = 1;
        in_last  = (w == BLK / 32 - 1);
        for (int k = 0; k < 32; k++) in_data[k*8 +: 8] = d[w*32 + k];
        @(posedge clk);
        check(in_ready, "input taken every cycle");
        @(negedge clk);
      end
      in_valid = 0; in_last = 0;
      check(($time - t0) / 2 == BLK / 32, "load at one word per cycle");
      c.delete();
      seen_last = 0;
      while (!done) begin
        out_ready = (r >= 5) ? 1'($urandom_range(0, 1)) : 1'b1;
        @(posedge clk);
        if (out_valid && out_ready) begin
          c.push_back(out_data);
          if (out_last) seen_last = 1;
          check(!seen_last || out_last, "no byte after out_last");
        end
        @(negedge clk);
      end
      check(clen == 16'(c.size()), $sformatf("clen %0d vs %0d bytes", clen, c.size()));
      check(seen_last, "out_last seen");
      o = u_ref.lz4_ref_decode(c, err);
      check(!err, "reference decoder accepts the block");
      check(o == d, $sformatf("round trip of plane kind %0d (%0d -> %0d bytes)", kind, BLK, c.size()));
      if (kind == 0) check(c.size() < 40, "all-zero plane compresses");
      if (kind == 1) check(c.size() <= BLK + BLK / 255 + 16, "bounded growth of random plane");
      if (kind == 2 || kind == 3) check(c.size() < BLK, "redundant plane compresses");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
