// Testbench for kv_cluster: random token groups (exponents drawn from a
// narrow per-channel range, as KV channels behave, and fully random in the
// second group) are streamed token by token. Expected outputs are computed
// here: beta_j = minimum exponent of channel j over the group, and the output
// stream is channel-major (channel 0 tokens 0..NTOK-1, channel 1, ...) with
// each exponent replaced by exponent - beta_j. Checks data, out_last, every
// beta_j through the lookup port, and the fill and drain rates.
module tb_kv_cluster;
  import cmc_pkg::*;
  localparam int NTOK = 32;
  localparam int NCH  = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, out_last;
  logic [255:0] in_data, out_data;
  logic [$clog2(NCH)-1:0] beta_idx;
  logic [7:0]   beta;
  logic [15:0]  kv [NTOK][NCH];
  logic [7:0]   bref [NCH];

  kv_cluster #(.NTOK(NTOK), .NCH(NCH)) dut (.*);

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
    int t0;
    in_valid = 0; in_data = '0; out_ready = 0; beta_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 2; g++) begin
      for (int j = 0; j < NCH; j++) begin
        int centre;
        centre = $urandom_range(100, 140);
        bref[j] = 8'hFF;
        for (int t = 0; t < NTOK; t++) begin
          logic [7:0] e;
          e = (g == 0) ? 8'(centre + $urandom_range(0, 3)) : 8'($urandom);
          kv[t][j] = {1'($urandom), e, 7'($urandom)};
          if (e < bref[j]) bref[j] = e;
        end
      end
      @(negedge clk);
      t0 = $time;
      for (int t = 0; t < NTOK; t++)
        for (int c = 0; c < NCH / 16; c++) begin
          in_valid = 1;
          for (int k = 0; k < 16; k++) in_data[k*16 +: 16] = kv[t][c*16 + k];
          @(posedge clk);
          check(in_ready, "in_ready while filling");
          @(negedge clk);
        end
      in_valid = 0;
      check(($time - t0) / 2 == NTOK * NCH / 16, "fill at one beat per cycle");
      for (int j = 0; j < NCH; j++) begin
        beta_idx = 6'(j);
        #0.1;
        check(beta == bref[j], $sformatf("beta of channel %0d", j));
      end
      t0 = $time;
      for (int j = 0; j < NCH; j++)
        for (int u = 0; u < NTOK / 16; u++) begin
          out_ready = (g == 0) ? 1'b1 : 1'($urandom_range(0, 1));
          while (!(out_ready && out_valid)) begin
            @(negedge clk);
            out_ready = (g == 0) ? 1'b1 : 1'($urandom_range(0, 1));
          end
          for (int k = 0; k < 16; k++) begin
            logic [15:0] x;
            x = kv[u*16 + k][j];
            x[14:7] = x[14:7] - bref[j];
            check(out_data[k*16 +: 16] == x, $sformatf("group %0d ch %0d tok %0d", g, j, u*16 + k));
          end
          check(out_last == (j == NCH - 1 && u == NTOK / 16 - 1), "out_last");
          @(negedge clk);
        end
      if (g == 0) check(($time - t0) / 2 == NTOK * NCH / 16, "drain at one beat per cycle");
      out_ready = 0;
      check(in_ready, "ready for next group");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
