// tb_scatter_core: the scatter core gathers from a real ppr_buffer filled
// with random Q1.11 values and must produce dp[k][j] = trunc(val[j] *
// P[k][y[j]]) for every packet, in order, across random pipeline stalls
// (en low). With en held high the result follows the packet by 2 cycles.
module tb_scatter_core;
  localparam int B = 4, KAPPA = 2, W = 12, FRAC = 11, MAX_V = 32;
  localparam int AW = $clog2(MAX_V), BW = $clog2(MAX_V / B);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en, in_valid, in_last, rd_re, out_valid, out_last, we;
  logic [B-1:0][31:0] in_x, in_y, in_val, out_x;
  logic [B-1:0][AW-1:0] rd_addr;
  logic [B-1:0][KAPPA-1:0][W-1:0] rd_data, wr_data;
  logic [KAPPA-1:0][B-1:0][W-1:0] out_dp;
  logic [BW-1:0] wr_blk;
  logic [KAPPA-1:0][W-1:0] mem [MAX_V];

  ppr_buffer #(.B(B), .KAPPA(KAPPA), .W(W), .MAX_V(MAX_V)) u_mem (
    .clk, .re(rd_re), .rd_addr, .rd_data, .we, .wr_blk, .wr_data);
  scatter_core #(.B(B), .KAPPA(KAPPA), .W(W), .FRAC(FRAC), .MAX_V(MAX_V)) dut (.*);

  typedef struct { logic [B-1:0][31:0] x; logic [KAPPA-1:0][B-1:0][W-1:0] dp; logic last; } exp_t;
  exp_t q [$];
  int n_out, lat_bad;

  task automatic drive(bit stalls, int n);
    for (int t = 0; t < n; t++) begin
      @(negedge clk);
      // outputs taken at the coming edge
      if (en && out_valid) begin
        exp_t e;
        e = q.pop_front();
        checks++; n_out++;
        if (out_dp !== e.dp || out_x !== e.x || out_last !== e.last) begin
          failures++; $display("FAIL: dp mismatch, output %0d", n_out);
        end
      end
      en = stalls ? ($urandom_range(0, 2) != 0) : 1'b1;
      // keep the packet while stalled, new one otherwise
      if (!(in_valid && !en_prev)) begin
        in_valid = (t < n - 6) && ($urandom_range(0, 3) != 0);
        in_last  = ($urandom_range(0, 7) == 0);
        for (int j = 0; j < B; j++) begin
          in_x[j]   = $urandom;
          in_y[j]   = $urandom_range(0, MAX_V - 1);
          in_val[j] = {20'h0, 12'($urandom_range(0, 1 << FRAC))};
        end
      end
      if (in_valid && en) begin
        exp_t e;
        e.x = in_x; e.last = in_last;
        for (int k = 0; k < KAPPA; k++)
          for (int j = 0; j < B; j++)
            e.dp[k][j] = W'((int'(in_val[j][W-1:0]) * int'(mem[in_y[j]][k])) >> FRAC);
        q.push_back(e);
      end
      en_prev = en;
    end
  endtask
  logic en_prev;

  initial begin
    en = 0; in_valid = 0; in_last = 0; in_x = '0; in_y = '0; in_val = '0; we = 0; en_prev = 1;
    wr_blk = '0; wr_data = '0;
    for (int b = 0; b < MAX_V / B; b++) begin
      @(negedge clk);
      we = 1; wr_blk = BW'(b);
      for (int j = 0; j < B; j++)
        for (int k = 0; k < KAPPA; k++) begin
          wr_data[j][k] = W'($urandom_range(0, (1 << W) - 1));
          mem[b*B+j][k] = wr_data[j][k];
        end
    end
    @(negedge clk); we = 0; rst_n = 1;
    // latency with en high
    @(negedge clk); en = 1; in_valid = 1; in_y = '0; in_val = '0; in_x = '0; in_last = 0;
    @(negedge clk); in_valid = 0;
    checks++;
    if (out_valid) lat_bad++;
    @(negedge clk);
    if (!out_valid) lat_bad++;
    if (lat_bad) begin failures++; $display("FAIL: latency is not 2 cycles"); end
    @(negedge clk); @(negedge clk);
    en_prev = 1;
    drive(0, 100);
    drive(1, 300);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: %0d results missing", q.size()); end
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
