// Testbench for bitplane_aggregator: random blocks are streamed in; every
// output word is compared with the bit-plane transpose worked out here from
// the stored input values (bit k of plane p word w = bit p of value 256w+k),
// and the plane order (top plane down to 0), plane_last/last flags and the
// one-beat-per-cycle fill and drain rates are checked. Blocks are BF16 (no
// stalls, rate check), BF16 with random output backpressure, FP8 (8-bit
// elements, 32 per beat, planes 7..0; rate check), INT4 (4-bit elements, 64
// per beat, planes 3..0; backpressure) and BF16 again.
module tb_bitplane_aggregator;
  import cmc_pkg::*;
  localparam int NVALS  = 1024;
  localparam int NWORDS = NVALS / 256;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, out_plane_last, out_last;
  logic [255:0] in_data, out_data;
  logic [3:0]   out_plane;
  fmt_e         fmt;
  logic [15:0]  vals [NVALS];

  bitplane_aggregator #(.NVALS(NVALS)) dut (.*);

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
    fmt_e f [5] = '{FMT_BF16, FMT_BF16, FMT_FP8, FMT_INT4, FMT_BF16};
    int t0, t1, t2;
    int ew, epb, nb;
    bit stall;
    in_valid = 0; in_data = '0; out_ready = 0; fmt = FMT_BF16;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 5; blk++) begin
      fmt   = f[blk];
      ew    = 16 >> fmt_shift(fmt);      // element width
      epb   = 256 / ew;                  // elements per beat
      nb    = NVALS / epb;               // beats per block
      stall = (blk == 1 || blk == 3);
      for (int v = 0; v < NVALS; v++) vals[v] = 16'($urandom) & 16'((1 << ew) - 1);
      // fill
      @(negedge clk);
      t0 = $time;
      for (int b = 0; b < nb; b++) begin
        in_valid = 1;
        in_data  = '0;
        for (int k = 0; k < epb; k++)
          for (int i = 0; i < ew; i++) in_data[k*ew + i] = vals[b*epb + k][i];
        @(posedge clk);
        check(in_ready, "in_ready during fill");
        @(negedge clk);
      end
      in_valid = 0;
      t1 = $time;
      if (!stall) check((t1 - t0) / 2 == nb, "fill takes one cycle per beat");
      // drain
      for (int p = ew - 1; p >= 0; p--) begin
        for (int w = 0; w < NWORDS; w++) begin
          logic [255:0] exp_w;
          for (int k = 0; k < 256; k++) exp_w[k] = vals[w*256 + k][p];
          out_ready = !stall ? 1'b1 : 1'($urandom_range(0, 1));
          while (!(out_ready && out_valid)) begin
            @(negedge clk);
            out_ready = !stall ? 1'b1 : 1'($urandom_range(0, 1));
          end
          check(out_data == exp_w, $sformatf("block %0d plane %0d word %0d data", blk, p, w));
          check(out_plane == 4'(p), "plane index");
          check(out_plane_last == (w == NWORDS - 1), "plane_last flag");
          check(out_last == (p == 0 && w == NWORDS - 1), "last flag");
          check(!in_ready, "no input accepted while draining");
          @(negedge clk);
        end
      end
      out_ready = 0;
      t2 = $time;
      if (!stall) check((t2 - t1) / 2 == ew * NWORDS, "drain takes one cycle per plane word");
      check(in_ready, "ready for the next block");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
