// tb_aggregation_core: random packets whose destinations are sorted and lie
// in [x[0], x[0]+B) go through the aggregation core. For each, the 2B-entry
// aggregate is rebuilt here by placing every lane's value at x[j] - x_s, and
// must equal the core's output, together with x_s and the upper-half flag.
// One cycle of latency; a stalled cycle (en low) must hold the output.
module tb_aggregation_core;
  localparam int B = 8, KAPPA = 3, W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en, in_valid, in_last, out_valid, out_hi, out_last;
  logic [B-1:0][31:0] in_x;
  logic [KAPPA-1:0][B-1:0][W-1:0] in_dp;
  logic [31:0] out_xs;
  logic [KAPPA-1:0][2*B-1:0][W-1:0] out_agg, e_agg, held;

  aggregation_core #(.B(B), .KAPPA(KAPPA), .W(W)) dut (.*);

  int n_hi = 0, n_multi = 0;
  initial begin
    en = 1; in_valid = 0; in_last = 0; in_x = '0; in_dp = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      logic [31:0] x0, xs;
      logic ehi;
      @(negedge clk);
      en = 1; in_valid = 1; in_last = (t % 9 == 0);
      x0 = $urandom_range(0, 5000);
      xs = x0 & ~32'(B - 1);
      in_x[0] = x0;
      for (int j = 1; j < B; j++) begin
        logic [31:0] nx;
        nx = in_x[j-1] + (($urandom_range(0, 2) == 0) ? 1 : 0);
        in_x[j] = (nx - x0 < B) ? nx : in_x[j-1];
      end
      for (int j = 1; j < B; j++) if (in_x[j] == in_x[j-1]) n_multi++;
      for (int k = 0; k < KAPPA; k++)
        for (int j = 0; j < B; j++) in_dp[k][j] = W'($urandom_range(0, 4095));
      e_agg = '0; ehi = 0;
      for (int j = 0; j < B; j++) begin
        for (int k = 0; k < KAPPA; k++) e_agg[k][in_x[j] - xs] += in_dp[k][j];
        if (in_x[j] - xs >= B) ehi = 1;
      end
      n_hi += ehi;
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_xs != xs || out_agg !== e_agg || out_hi != ehi || out_last != in_last) begin
        failures++; $display("FAIL: packet %0d x0=%0d", t, x0);
      end
      // stall: output holds
      if (t % 5 == 0) begin
        held = out_agg;
        @(negedge clk); en = 0; in_x = '0; in_dp = '1;
        @(posedge clk); #1;
        checks++;
        if (out_agg !== held || !out_valid) begin failures++; $display("FAIL: not held under stall"); end
      end
    end
    checks++;
    if (n_hi == 0 || n_multi == 0) begin failures++; $display("FAIL: coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
