// tb_update_unit: P2 is a ppr_buffer with random contents. In update mode
// every written P1 value must equal trunc(alpha*P2) + scaling[k] + (1-alpha)
// on the personalization vertex, 0 above |V|; each block must be written
// once and the same P2 block cleared. In init mode P1 must be 1.0 on the
// personalization vertex and 0 elsewhere. A pass takes ceil(|V|/B) + 2 cycles.
module tb_update_unit;
  localparam int B = 4, KAPPA = 3, W = 12, FRAC = 11, MAX_V = 64;
  localparam int AW = $clog2(MAX_V), BW = $clog2(MAX_V / B);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic start, init_mode, rd_re, p1_we, p2_we, done, we;
  logic [31:0] num_vertices;
  logic [W-1:0] alpha, one_minus_alpha;
  logic [KAPPA-1:0][W-1:0] scaling;
  logic [KAPPA-1:0][31:0] pers;
  logic [B-1:0][AW-1:0] rd_addr;
  logic [B-1:0][KAPPA-1:0][W-1:0] rd_data, p1_data, wr_data;
  logic [BW-1:0] p1_blk, p2_blk, wr_blk;
  logic [KAPPA-1:0][W-1:0] mem [MAX_V];
  int nwr [MAX_V / B], nclr [MAX_V / B];
  logic [KAPPA-1:0][W-1:0] p1 [MAX_V];

  ppr_buffer #(.B(B), .KAPPA(KAPPA), .W(W), .MAX_V(MAX_V)) u_p2 (
    .clk, .re(rd_re), .rd_addr, .rd_data, .we, .wr_blk, .wr_data);
  update_unit #(.B(B), .KAPPA(KAPPA), .W(W), .FRAC(FRAC), .MAX_V(MAX_V)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (p1_we) begin nwr[p1_blk]++; for (int j = 0; j < B; j++) p1[int'(p1_blk)*B+j] = p1_data[j]; end
    if (p2_we) nclr[p2_blk]++;
  end

  task automatic fill();
    for (int b = 0; b < MAX_V / B; b++) begin
      @(negedge clk);
      we = 1; wr_blk = BW'(b);
      for (int j = 0; j < B; j++)
        for (int k = 0; k < KAPPA; k++) begin
          wr_data[j][k] = W'($urandom_range(0, 1500));
          mem[b*B+j][k] = wr_data[j][k];
        end
    end
    @(negedge clk); we = 0;
  endtask

  task automatic run(bit init, int nv);
    longint t0, t1;
    int nb = (nv + B - 1) / B;
    num_vertices = nv; init_mode = init;
    for (int b = 0; b < MAX_V / B; b++) begin nwr[b] = 0; nclr[b] = 0; end
    for (int i = 0; i < MAX_V; i++) p1[i] = '1;
    @(negedge clk); start = 1; t0 = cycle; @(negedge clk); start = 0; init_mode = 0;
    while (!done) @(negedge clk);
    t1 = cycle;
    checks++;
    if (t1 - t0 != nb + 2) begin failures++; $display("FAIL: pass took %0d cycles for %0d blocks", t1 - t0, nb); end
    for (int b = 0; b < MAX_V / B; b++) begin
      checks++;
      if (nwr[b] != (b < nb) || nclr[b] != (b < nb)) begin failures++; $display("FAIL: block %0d written %0d / cleared %0d", b, nwr[b], nclr[b]); end
    end
    for (int i = 0; i < nb * B; i++)
      for (int k = 0; k < KAPPA; k++) begin
        longint e;
        if (i >= nv) e = 0;
        else if (init) e = (i == pers[k]) ? (1 << FRAC) : 0;
        else e = (((longint'(alpha) * longint'(mem[i][k])) >> FRAC) + longint'(scaling[k])
                  + ((i == pers[k]) ? longint'(one_minus_alpha) : 0)) & ((1 << W) - 1);
        checks++;
        if (longint'(p1[i][k]) != e) begin failures++; $display("FAIL: P1[%0d][%0d] = %0d, expected %0d", k, i, p1[i][k], e); end
      end
  endtask

  initial begin
    start = 0; init_mode = 0; we = 0; wr_blk = '0; wr_data = '0; num_vertices = 0;
    alpha = W'(1741); one_minus_alpha = W'(2048 - 1741);
    for (int k = 0; k < KAPPA; k++) begin scaling[k] = W'(k * 5 + 1); pers[k] = 32'(k * 17 + 3); end
    fill();
    rst_n = 1;
    run(0, 64);
    run(0, 50);
    run(1, 61);
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
