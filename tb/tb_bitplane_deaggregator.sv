// Testbench for bitplane_deaggregator: for a random block, the top K planes
// are computed here from the values and fed in MSB-first order with random
// input gaps; the emitted beats must equal the original values with the bits
// below the K fetched planes cleared. Cases: BF16 with K = 16, 8 and 3, FP8
// (8-bit elements, 32 per beat) with K = 8 and 5, INT4 (4-bit elements, 64 per
// beat) with K = 4 and 2, then BF16 again. Also checked: out_last, in_ready
// low while draining, and one output beat per cycle.
module tb_bitplane_deaggregator;
  import cmc_pkg::*;
  localparam int NVALS  = 1024;
  localparam int NWORDS = NVALS / 256;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [255:0] in_data, out_data;
  logic [3:0]   in_plane;
  fmt_e         fmt;
  logic [15:0]  vals [NVALS];

  bitplane_deaggregator #(.NVALS(NVALS)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fmt_e ff [8] = '{FMT_BF16, FMT_BF16, FMT_BF16, FMT_FP8, FMT_FP8, FMT_INT4, FMT_INT4, FMT_BF16};
    int   kk [8] = '{16, 8, 3, 8, 5, 4, 2, 12};
    int t0, ew, epb, nb, K;
    logic [15:0] mask;
    in_valid = 0; in_data = '0; in_plane = '0; in_last = 0; out_ready = 0; fmt = FMT_BF16;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (kk[r]) begin
      fmt  = ff[r];
      ew   = 16 >> fmt_shift(fmt);
      epb  = 256 / ew;
      nb   = NVALS / epb;
      K    = kk[r];
      mask = 16'(((1 << ew) - 1) & ~((1 << (ew - K)) - 1));
      for (int v = 0; v < NVALS; v++) vals[v] = 16'($urandom) & 16'((1 << ew) - 1);
      @(negedge clk);
      for (int q = 0; q < K; q++) begin
        int p;
        p = ew - 1 - q;
        for (int w = 0; w < NWORDS; w++) begin
          while ($urandom_range(0, 3) == 0) @(negedge clk);   // input gaps
          in_valid = 1;
          in_plane = 4'(p);
          in_last  = (q == K - 1) && (w == NWORDS - 1);
          for (int k = 0; k < 256; k++) in_data[k] = vals[w*256 + k][p];
          @(posedge clk);
          check(in_ready, "in_ready while filling");
          @(negedge clk);
          in_valid = 0;
          in_last  = 0;
        end
      end
      out_ready = 1;
      t0 = $time;
      for (int b = 0; b < nb; b++) begin
        @(posedge clk);
        check(out_valid, "out_valid every drain cycle");
        for (int k = 0; k < epb; k++) begin
          logic [15:0] got;
          got = '0;
          for (int i = 0; i < ew; i++) got[i] = out_data[k*ew + i];
          check(got == (vals[b*epb + k] & mask),
                $sformatf("case %0d K=%0d beat %0d value %0d", r, K, b, k));
        end
        check(out_last == (b == nb - 1), "out_last");
        check(!in_ready, "in_ready low while draining");
        @(negedge clk);
      end
      check(($time - t0) / 2 == nb, "one beat per cycle");
      out_ready = 0;
      @(negedge clk);
      check(!out_valid && in_ready, "back to fill after the block");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
