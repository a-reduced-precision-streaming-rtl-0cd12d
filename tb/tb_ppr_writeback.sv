// tb_ppr_writeback: the result stream read from a ppr_buffer with random
// contents must deliver blocks 0 .. ceil(|V|/B)-1 in order with the buffer's
// data, under a randomly stalling consumer; with a ready consumer it must
// deliver one block per cycle.
module tb_ppr_writeback;
  localparam int B = 4, KAPPA = 2, W = 10, MAX_V = 128;
  localparam int AW = $clog2(MAX_V), BW = $clog2(MAX_V / B);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic start, rd_re, out_valid, out_ready, done, we;
  logic [31:0] num_vertices;
  logic [B-1:0][AW-1:0] rd_addr;
  logic [B-1:0][KAPPA-1:0][W-1:0] rd_data, out_data, wr_data;
  logic [BW-1:0] out_blk, wr_blk;
  logic [B-1:0][KAPPA-1:0][W-1:0] mem [MAX_V / B];

  ppr_buffer #(.B(B), .KAPPA(KAPPA), .W(W), .MAX_V(MAX_V)) u_mem (
    .clk, .re(rd_re), .rd_addr, .rd_data, .we, .wr_blk, .wr_data);
  ppr_writeback #(.B(B), .KAPPA(KAPPA), .W(W), .MAX_V(MAX_V)) dut (.*);

  int opct, nexp, n_got;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (int'(out_blk) != n_got || out_data !== mem[n_got]) begin
        failures++; $display("FAIL: block %0d (got blk %0d)", n_got, out_blk);
      end
      n_got++;
    end
  end
  always @(negedge clk) out_ready = ($urandom_range(0, 99) < opct);

  task automatic run(int nv, int pct, bit rate);
    longint t0;
    num_vertices = nv; opct = pct; n_got = 0; nexp = (nv + B - 1) / B;
    @(negedge clk); start = 1; t0 = cycle; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (n_got != nexp) begin failures++; $display("FAIL: %0d blocks, expected %0d", n_got, nexp); end
    if (rate) begin
      checks++;
      if (cycle - t0 > nexp + 3) begin failures++; $display("FAIL: %0d cycles for %0d blocks", cycle - t0, nexp); end
    end
  endtask

  initial begin
    start = 0; we = 0; wr_blk = '0; wr_data = '0; num_vertices = 0; opct = 100;
    for (int b = 0; b < MAX_V / B; b++) begin
      @(negedge clk);
      we = 1; wr_blk = BW'(b);
      for (int j = 0; j < B; j++)
        for (int k = 0; k < KAPPA; k++) wr_data[j][k] = W'($urandom);
      mem[b] = wr_data;
    end
    @(negedge clk); we = 0; rst_n = 1;
    run(128, 100, 1);
    run(97, 40, 0);
    run(5, 70, 0);
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
