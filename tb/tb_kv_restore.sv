// Testbench for kv_restore: random base exponents are loaded, then a group is
// fed channel-major with exponent deltas (random input gaps). The expected
// output, worked out here, is token-major (token 0 channels 0..NCH-1, ...)
// with every exponent equal to delta + beta_j. Checks data, out_last and the
// one-beat-per-cycle drain.
module tb_kv_restore;
  import cmc_pkg::*;
  localparam int NTOK = 32;
  localparam int NCH  = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic beta_wr_en;
  logic [$clog2(NCH)-1:0] beta_wr_idx;
  logic [7:0] beta_wr_data;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  logic [255:0] in_data, out_data;
  logic [15:0]  dl [NTOK][NCH];   // delta-form values
  logic [7:0]   b [NCH];

  kv_restore #(.NTOK(NTOK), .NCH(NCH)) dut (.*);

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
    beta_wr_en = 0; beta_wr_idx = '0; beta_wr_data = '0;
    in_valid = 0; in_data = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 2; g++) begin
      @(negedge clk);
      for (int j = 0; j < NCH; j++) begin
        b[j] = 8'($urandom);
        beta_wr_en = 1; beta_wr_idx = 6'(j); beta_wr_data = b[j];
        @(negedge clk);
      end
      beta_wr_en = 0;
      for (int t = 0; t < NTOK; t++)
        for (int j = 0; j < NCH; j++) dl[t][j] = {1'($urandom), 8'($urandom_range(0, 5)), 7'($urandom)};
      for (int j = 0; j < NCH; j++)
        for (int u = 0; u < NTOK / 16; u++) begin
          while ($urandom_range(0, 3) == 0) @(negedge clk);
          in_valid = 1;
          for (int k = 0; k < 16; k++) in_data[k*16 +: 16] = dl[u*16 + k][j];
          @(posedge clk);
          check(in_ready, "in_ready while filling");
          @(negedge clk);
          in_valid = 0;
        end
      out_ready = 1;
      t0 = $time;
      for (int t = 0; t < NTOK; t++)
        for (int c = 0; c < NCH / 16; c++) begin
          @(posedge clk);
          check(out_valid, "out_valid each drain cycle");
          for (int k = 0; k < 16; k++) begin
            logic [15:0] x;
            x = dl[t][c*16 + k];
            x[14:7] = x[14:7] + b[c*16 + k];
            check(out_data[k*16 +: 16] == x, $sformatf("token %0d channel %0d", t, c*16 + k));
          end
          check(out_last == (t == NTOK - 1 && c == NCH / 16 - 1), "out_last");
          @(negedge clk);
        end
      check(($time - t0) / 2 == NTOK * NCH / 16, "drain at one beat per cycle");
      out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
