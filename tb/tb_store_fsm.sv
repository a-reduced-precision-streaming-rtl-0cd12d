// tb_store_fsm: streams random aggregates (block bases that stay, advance by
// one block or jump ahead, with and without a used upper half) into the store
// FSM under random valid gaps. The expected content of every block is the
// sum of all lower and upper halves aimed at it. Each block may be written at
// most once, and in increasing order; at the end the written blocks must hold
// exactly the expected sums and every block with a non-zero sum must have
// been written. The FSM must stall exactly on a jump while res2 is in use.
module tb_store_fsm;
  localparam int B = 4, KAPPA = 2, W = 16, MAX_V = 4096;
  localparam int NB = MAX_V / B, BW = $clog2(NB);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, in_valid, in_ready, in_hi, in_last, wr_en, done, stall;
  logic [31:0] in_xs;
  logic [KAPPA-1:0][2*B-1:0][W-1:0] in_agg;
  logic [BW-1:0] wr_blk;
  logic [B-1:0][KAPPA-1:0][W-1:0] wr_data;

  store_fsm #(.B(B), .KAPPA(KAPPA), .W(W), .MAX_V(MAX_V)) dut (.*);

  logic [KAPPA-1:0][W-1:0] expv [MAX_V];
  logic [KAPPA-1:0][W-1:0] gotv [MAX_V];
  int nwr [NB];
  int last_blk, n_stall, n_done;

  always @(posedge clk) if (rst_n) begin
    if (wr_en) begin
      nwr[wr_blk]++;
      if (int'(wr_blk) <= last_blk) begin failures++; $display("FAIL: block %0d written out of order", wr_blk); end
      last_blk = int'(wr_blk);
      for (int j = 0; j < B; j++) gotv[int'(wr_blk)*B+j] = wr_data[j];
    end
    if (stall) n_stall++;
    if (done) n_done++;
  end

  task automatic pass(int npk);
    logic [31:0] xs = 32'(B * $urandom_range(0, 3));
    int exp_stall = 0;
    bit used = 0, first = 1;
    logic [31:0] xso = 0;
    for (int i = 0; i < MAX_V; i++) begin expv[i] = '0; gotv[i] = '0; end
    for (int i = 0; i < NB; i++) nwr[i] = 0;
    last_blk = -1; n_stall = 0; n_done = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int p = 0; p < npk; p++) begin
      int r = $urandom_range(0, 9);
      if (p > 0) xs += (r < 4) ? 0 : (r < 7) ? B : B * $urandom_range(2, 4);
      in_xs = xs; in_last = (p == npk - 1);
      in_hi = ($urandom_range(0, 2) == 0);
      for (int k = 0; k < KAPPA; k++)
        for (int j = 0; j < 2*B; j++)
          in_agg[k][j] = (j < B || in_hi) ? W'($urandom_range(0, 255)) : '0;
      for (int k = 0; k < KAPPA; k++)
        for (int j = 0; j < 2*B; j++) expv[xs + j][k] += in_agg[k][j];
      // model of when the FSM has to stall
      if (!first && xs != xso && xs != xso + B && used) exp_stall++;
      if (first || xs != xso) begin used = in_hi; end else used |= in_hi;
      first = 0; xso = xs;
      while ($urandom_range(0, 2) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      do @(posedge clk); while (!in_ready);
      @(negedge clk); in_valid = 0;
    end
    repeat (4) @(negedge clk);
    checks++;
    if (n_done != 1) begin failures++; $display("FAIL: done pulsed %0d times", n_done); end
    checks++;
    if (n_stall != exp_stall) begin failures++; $display("FAIL: %0d stalls, expected %0d", n_stall, exp_stall); end
    for (int b = 0; b < NB; b++) begin
      bit nz = 0;
      for (int j = 0; j < B; j++) if (expv[b*B+j] != '0) nz = 1;
      checks++;
      if (nwr[b] > 1 || (nz && nwr[b] == 0)) begin failures++; $display("FAIL: block %0d written %0d times", b, nwr[b]); end
      for (int j = 0; j < B; j++) begin
        checks++;
        if (gotv[b*B+j] !== expv[b*B+j]) begin failures++; $display("FAIL: vertex %0d", b*B+j); end
      end
    end
  endtask

  initial begin
    start = 0; in_valid = 0; in_xs = '0; in_agg = '0; in_hi = 0; in_last = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    pass(120);
    pass(1);
    pass(200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
