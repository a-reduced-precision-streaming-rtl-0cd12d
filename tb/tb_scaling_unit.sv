// tb_scaling_unit: fills a ppr_buffer with random values and a DRAM model
// with a random dangling bitmap, runs the scaling pass and compares each
// scaling[k] with trunc(alpha_over_v * sum of dangling P[k][i]) computed
// here. Two vertex counts are used, one that ends inside a bitmap word and
// inside a block. The pass must take no more than |V|/B cycles plus a fixed
// cost per bitmap word.
module tb_scaling_unit;
  localparam int B = 8, KAPPA = 2, W = 16, FRAC = 15, P = 64, MAX_V = 256;
  localparam int AW = $clog2(MAX_V), BW = $clog2(MAX_V / B);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic start, dreq_valid, dreq_ready, drsp_valid, rd_re, done, we;
  logic [31:0] num_vertices, dreq_addr;
  logic [W-1:0] alpha_over_v;
  logic [P-1:0] drsp_data;
  logic [B-1:0][AW-1:0] rd_addr;
  logic [B-1:0][KAPPA-1:0][W-1:0] rd_data, wr_data;
  logic [KAPPA-1:0][W-1:0] scaling;
  logic [BW-1:0] wr_blk;
  logic [KAPPA-1:0][W-1:0] mem [MAX_V];
  logic [P-1:0] bitmap [MAX_V / P];

  ppr_buffer #(.B(B), .KAPPA(KAPPA), .W(W), .MAX_V(MAX_V)) u_mem (
    .clk, .re(rd_re), .rd_addr, .rd_data, .we, .wr_blk, .wr_data);
  scaling_unit #(.B(B), .KAPPA(KAPPA), .W(W), .FRAC(FRAC), .P_SIZE(P), .MAX_V(MAX_V)) dut (.*);

  // bitmap memory, 3-cycle latency, random request acceptance
  longint due [$]; int adr [$];
  always @(posedge clk) begin
    dreq_ready <= ($urandom_range(0, 1) == 0);
    if (dreq_valid && dreq_ready) begin due.push_back(cycle + 3); adr.push_back(dreq_addr); end
    drsp_valid <= 1'b0;
    if (due.size() > 0 && due[0] <= cycle) begin
      automatic int a = adr.pop_front();
      void'(due.pop_front());
      drsp_valid <= 1'b1; drsp_data <= bitmap[a];
    end
  end

  task automatic run(int nv);
    longint t0, t1, s;
    num_vertices = nv;
    @(negedge clk); start = 1; t0 = cycle; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t1 = cycle;
    for (int k = 0; k < KAPPA; k++) begin
      s = 0;
      for (int i = 0; i < nv; i++) if (bitmap[i / P][i % P]) s += longint'(mem[i][k]);
      s = (s * longint'(alpha_over_v)) >> FRAC;
      if (s >= (1 << W)) s = (1 << W) - 1;
      checks++;
      if (longint'(scaling[k]) != s) begin failures++; $display("FAIL: scaling[%0d] = %0d, expected %0d", k, scaling[k], s); end
    end
    checks++;
    // |V|/B block reads, plus request and ~6-cycle round trip per bitmap word
    if (t1 - t0 > (nv + B - 1) / B + 12 * ((nv + P - 1) / P) + 6) begin
      failures++; $display("FAIL: pass took %0d cycles", t1 - t0);
    end
  endtask

  initial begin
    start = 0; we = 0; wr_blk = '0; wr_data = '0; num_vertices = 0;
    alpha_over_v = W'(3000);
    for (int w = 0; w < MAX_V / P; w++) bitmap[w] = {$urandom, $urandom};
    for (int b = 0; b < MAX_V / B; b++) begin
      @(negedge clk);
      we = 1; wr_blk = BW'(b);
      for (int j = 0; j < B; j++)
        for (int k = 0; k < KAPPA; k++) begin
          wr_data[j][k] = W'($urandom_range(0, 2000));
          mem[b*B+j][k] = wr_data[j][k];
        end
    end
    @(negedge clk); we = 0; rst_n = 1;
    run(256);
    run(150);
    alpha_over_v = W'(1 << FRAC);     // large factor: saturation path
    for (int w = 0; w < MAX_V / P; w++) bitmap[w] = '1;
    run(256);
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
