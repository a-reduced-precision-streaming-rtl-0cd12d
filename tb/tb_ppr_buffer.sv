// tb_ppr_buffer: checks the cyclically partitioned PPR buffer against a flat
// shadow array. Random aligned block writes and random B-lane reads; read
// data must appear one cycle after re and hold while re is low.
module tb_ppr_buffer;
  localparam int B = 8, KAPPA = 2, W = 10, MAX_V = 64;
  localparam int AW = $clog2(MAX_V), DEPTH = MAX_V / B, BW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic re, we;
  logic [B-1:0][AW-1:0] rd_addr;
  logic [B-1:0][KAPPA-1:0][W-1:0] rd_data, wr_data, exp_d;
  logic [BW-1:0] wr_blk;
  logic [KAPPA-1:0][W-1:0] shadow [MAX_V];

  ppr_buffer #(.B(B), .KAPPA(KAPPA), .W(W), .MAX_V(MAX_V)) dut (.*);

  initial begin
    re = 0; we = 0; rd_addr = '0; wr_blk = '0; wr_data = '0;
    // fill every block
    for (int b = 0; b < DEPTH; b++) begin
      @(negedge clk);
      we = 1; wr_blk = BW'(b);
      for (int j = 0; j < B; j++)
        for (int k = 0; k < KAPPA; k++) begin
          wr_data[j][k] = W'($urandom);
          shadow[b*B+j][k] = wr_data[j][k];
        end
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      // random block write
      we = ($urandom_range(0, 3) == 0);
      wr_blk = BW'($urandom_range(0, DEPTH - 1));
      for (int j = 0; j < B; j++)
        for (int k = 0; k < KAPPA; k++) wr_data[j][k] = W'($urandom);
      re = 1;
      for (int j = 0; j < B; j++) begin
        rd_addr[j] = AW'($urandom_range(0, MAX_V - 1));
        exp_d[j] = shadow[rd_addr[j]];     // read sees the old contents
      end
      @(posedge clk); #1;
      if (we) for (int j = 0; j < B; j++) shadow[int'(wr_blk)*B+j] = wr_data[j];
      checks++;
      if (rd_data !== exp_d) begin failures++; $display("FAIL: read mismatch at step %0d", t); end
      // hold: re low, data must not change
      @(negedge clk); we = 0; re = 0; rd_addr = '0;
      @(posedge clk); #1;
      checks++;
      if (rd_data !== exp_d) begin failures++; $display("FAIL: read data not held"); end
    end
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
