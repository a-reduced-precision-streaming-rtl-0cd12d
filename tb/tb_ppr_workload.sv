// tb_ppr_workload: runs the accelerator, at its default parameters, on a
// graph of the size used to evaluate the architecture: 100 000 vertices and
// about 10^6 edges (an Erdos-Renyi-like random graph with mean out-degree 10
// and about 4 % dangling vertices), 8 personalization vertices, alpha = 0.85,
// 10 iterations. The graph is generated here, counting-sorted by destination
// and packed with the same rule as tb_ppr_top. The DRAM model answers after a
// fixed 4-cycle latency. All 800 000 results are compared bit-exactly with a
// model of the fixed-point recurrence; each vector must sum to no less than
// 1 minus the most that truncation can drop, and the SpMV phase must
// sustain one packet per cycle (plus gap stalls and a fixed latency).
module tb_ppr_workload;
  localparam int B = ppr_pkg::B, KAPPA = ppr_pkg::KAPPA, W = ppr_pkg::W, FRAC = ppr_pkg::FRAC;
  localparam int MAX_V = ppr_pkg::MAX_V;
  localparam int DEPTH = (MAX_V + B - 1) / B;
  localparam int BW = $clog2(DEPTH);
  localparam int NV = 100000, EMAX = 1200000, PMAX = 400000, NW = (NV + B*32 - 1) / (B*32);
  localparam int ITERS = 10;
  localparam longint ONE = 64'd1 << FRAC;
  localparam longint MASK = (64'd1 << W) - 1;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic busy, done;
  ppr_pkg::phase_e phase;
  logic [31:0] iter;
  logic [31:0] cfg_nv, cfg_np, cfg_it;
  logic [W-1:0] cfg_a, cfg_1a, cfg_aov;
  logic [KAPPA-1:0][31:0] cfg_pers;
  logic coo_req_valid, coo_req_ready, coo_rsp_valid;
  logic [31:0] coo_req_addr;
  logic [B*32-1:0] coo_rsp_x, coo_rsp_y, coo_rsp_val;
  logic dng_req_valid, dng_req_ready, dng_rsp_valid;
  logic [31:0] dng_req_addr;
  logic [B*32-1:0] dng_rsp_data;
  logic out_valid, out_ready;
  logic [BW-1:0] out_blk;
  logic [B-1:0][KAPPA-1:0][W-1:0] out_data;

  ppr_top dut (
    .clk, .rst_n, .start, .busy, .done, .phase, .iter,
    .cfg_num_vertices(cfg_nv), .cfg_num_packets(cfg_np), .cfg_max_iter(cfg_it),
    .cfg_alpha(cfg_a), .cfg_one_minus_alpha(cfg_1a), .cfg_alpha_over_v(cfg_aov),
    .cfg_pers,
    .coo_req_valid, .coo_req_ready, .coo_req_addr, .coo_rsp_valid,
    .coo_rsp_x, .coo_rsp_y, .coo_rsp_val,
    .dng_req_valid, .dng_req_ready, .dng_req_addr, .dng_rsp_valid, .dng_rsp_data,
    .out_valid, .out_ready, .out_blk, .out_data);

  // ---------------- graph
  int ne, np;
  int ex [EMAX], ey [EMAX], ev [EMAX];
  int outdeg [NV];
  logic [B*32-1:0] px [PMAX], py [PMAX], pv [PMAX];
  logic [B*32-1:0] dng [NW];

  task automatic build_graph();
    int tx [EMAX], ty [EMAX];
    int cnt [NV+1];
    int n = 0, lane = 0, x0 = 0;
    for (int v = 0; v < NV; v++) begin
      int d = ($urandom_range(0, 24) == 0) ? 0 : $urandom_range(5, 15);
      outdeg[v] = d;
      for (int i = 0; i < d; i++) begin
        tx[n] = $urandom_range(0, NV - 1); ty[n] = v; n++;
      end
    end
    // counting sort by destination
    for (int v = 0; v <= NV; v++) cnt[v] = 0;
    for (int i = 0; i < n; i++) cnt[tx[i] + 1]++;
    for (int v = 1; v <= NV; v++) cnt[v] += cnt[v-1];
    for (int i = 0; i < n; i++) begin
      int p = cnt[tx[i]]++;
      ex[p] = tx[i]; ey[p] = ty[i]; ev[p] = int'(ONE / outdeg[ty[i]]);
    end
    ne = n;
    np = 0;
    for (int i = 0; i < ne; i++) begin
      if (lane == B || (lane > 0 && ex[i] >= x0 + B)) begin
        for (; lane < B; lane++) begin
          px[np][32*lane +: 32] = x0; py[np][32*lane +: 32] = 0; pv[np][32*lane +: 32] = 0;
        end
        np++; lane = 0;
      end
      if (lane == 0) x0 = ex[i];
      px[np][32*lane +: 32] = ex[i]; py[np][32*lane +: 32] = ey[i]; pv[np][32*lane +: 32] = ev[i];
      lane++;
    end
    if (lane > 0) begin
      for (; lane < B; lane++) begin
        px[np][32*lane +: 32] = x0; py[np][32*lane +: 32] = 0; pv[np][32*lane +: 32] = 0;
      end
      np++;
    end
    for (int w = 0; w < NW; w++) dng[w] = '0;
    for (int v = 0; v < NV; v++) if (outdeg[v] == 0) dng[v / (B*32)][v % (B*32)] = 1'b1;
  endtask

  // ---------------- DRAM model: always ready, 4-cycle latency
  longint cq_due [$]; int cq_addr [$];
  longint dq_due [$]; int dq_addr [$];
  assign coo_req_ready = 1'b1;
  assign dng_req_ready = 1'b1;
  always @(posedge clk) begin
    if (coo_req_valid) begin cq_due.push_back(cycle + 4); cq_addr.push_back(coo_req_addr); end
    if (dng_req_valid) begin dq_due.push_back(cycle + 4); dq_addr.push_back(dng_req_addr); end
    coo_rsp_valid <= 1'b0;
    if (cq_due.size() > 0 && cq_due[0] <= cycle) begin
      automatic int a = cq_addr.pop_front();
      void'(cq_due.pop_front());
      coo_rsp_valid <= 1'b1;
      coo_rsp_x <= px[a]; coo_rsp_y <= py[a]; coo_rsp_val <= pv[a];
    end
    dng_rsp_valid <= 1'b0;
    if (dq_due.size() > 0 && dq_due[0] <= cycle) begin
      automatic int a = dq_addr.pop_front();
      void'(dq_due.pop_front());
      dng_rsp_valid <= 1'b1;
      dng_rsp_data <= dng[a];
    end
  end

  // ---------------- reference model
  longint ref_p [KAPPA][NV];
  task automatic reference();
    longint p2 [NV];
    longint a = longint'(cfg_a), a1 = longint'(cfg_1a), aov = longint'(cfg_aov);
    for (int k = 0; k < KAPPA; k++) begin
      for (int i = 0; i < NV; i++) ref_p[k][i] = (i == cfg_pers[k]) ? ONE : 0;
      for (int it = 0; it < ITERS; it++) begin
        longint s = 0, sc;
        for (int i = 0; i < NV; i++) if (outdeg[i] == 0) s += ref_p[k][i];
        sc = (s * aov) >> FRAC;
        if (sc > MASK) sc = MASK;
        for (int i = 0; i < NV; i++) p2[i] = 0;
        for (int e = 0; e < ne; e++)
          p2[ex[e]] = (p2[ex[e]] + ((longint'(ev[e]) * ref_p[k][ey[e]]) >> FRAC)) & MASK;
        for (int i = 0; i < NV; i++)
          ref_p[k][i] = (((a * p2[i]) >> FRAC) + sc + ((i == cfg_pers[k]) ? a1 : 0)) & MASK;
      end
    end
  endtask

  // ---------------- result capture, rate
  assign out_ready = 1'b1;
  int nblk_out = 0, bad = 0;
  longint spmv_t0, spmv_max = 0;
  int n_stall = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid)
      for (int j = 0; j < B; j++)
        for (int k = 0; k < KAPPA; k++) begin
          automatic int i = int'(out_blk) * B + j;
          if (i < NV) begin
            checks++;
            if (longint'(out_data[j][k]) != ref_p[k][i]) begin
              failures++; bad++;
              if (bad < 5) $display("FAIL: P[%0d][%0d] = %0d, expected %0d", k, i, out_data[j][k], ref_p[k][i]);
            end
          end
        end
    if (out_valid) nblk_out++;
    if (dut.u_store.stall) n_stall++;
    if (dut.spmv_start) spmv_t0 = cycle;
    if (dut.spmv_done && cycle - spmv_t0 > spmv_max) spmv_max = cycle - spmv_t0;
  end

  initial begin
    real sum [KAPPA];
    real lo_bound;
    cfg_it = ITERS;
    cfg_a  = W'(longint'(0.85 * real'(ONE)));
    cfg_1a = W'(ONE - longint'(cfg_a));
    cfg_nv = NV;
    cfg_aov = W'(longint'(cfg_a) / NV);
    for (int k = 0; k < KAPPA; k++) cfg_pers[k] = $urandom_range(0, NV - 1);
    build_graph();
    cfg_np = np;
    $display("graph: %0d vertices, %0d edges, %0d packets", NV, ne, np);
    reference();
    lo_bound = 1.0 - real'(ITERS) * real'(ne + 3 * NV) / real'(ONE);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    wait (done); @(posedge clk);
    $display("operation: %0d cycles, SpMV phase %0d cycles for %0d packets", cycle, spmv_max, np);
    checks++;
    if (nblk_out != (NV + B - 1) / B) begin failures++; $display("FAIL: %0d result blocks", nblk_out); end
    for (int k = 0; k < KAPPA; k++) begin
      sum[k] = 0;
      for (int i = 0; i < NV; i++) sum[k] += real'(ref_p[k][i]) / real'(ONE);
      // truncation drops at most one LSB per edge product, per alpha product
      // and per scaling term (plus alpha/|V| itself), in every iteration
      checks++;
      $display("vector %0d sums to %f (bound %f)", k, sum[k], lo_bound);
      if (sum[k] < lo_bound || sum[k] > 1.001) begin failures++; $display("FAIL: vector %0d sums to %f", k, sum[k]); end
    end
    checks++;
    if (spmv_max > longint'(np) + longint'(n_stall) / ITERS + 12) begin
      failures++; $display("FAIL: SpMV rate below one packet per cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
