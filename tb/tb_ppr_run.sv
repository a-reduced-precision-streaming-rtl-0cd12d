// tb_ppr_run: one end-to-end run of the accelerator at a chosen fixed-point
// precision (W bits, FRAC fraction bits), used by tb_ppr_precision. It is the
// same test as tb_ppr_top: a random 400-vertex graph with dangling vertices
// and skipped destination blocks, two operations of 10 iterations with
// alpha = 0.85 (ideal memory with a rate check, then random back-pressure),
// bit-exact comparison with a model of the same fixed-point recurrence, a
// lower bound on each vector's sum from the truncation error, and counters
// for every mechanism. It reports through its ports instead of finishing.
module tb_ppr_run #(
  parameter int W = 20,
  parameter int FRAC = 19
) (
  output bit fin,
  output int checks,
  output int failures
);
  localparam int B = ppr_pkg::B, KAPPA = ppr_pkg::KAPPA;
  localparam int MAX_V = ppr_pkg::MAX_V;
  localparam int AW = $clog2(MAX_V);
  localparam int DEPTH = (MAX_V + B - 1) / B;
  localparam int BW = $clog2(DEPTH);
  localparam int NV = 400, NMAX = 512, EMAX = 2048, PMAX = 1024;
  localparam int ITERS = 10;
  localparam longint ONE = 64'd1 << FRAC;
  localparam longint MASK = (64'd1 << W) - 1;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- DUT
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

  ppr_top #(.W(W), .FRAC(FRAC)) dut (
    .clk, .rst_n, .start, .busy, .done, .phase, .iter,
    .cfg_num_vertices(cfg_nv), .cfg_num_packets(cfg_np), .cfg_max_iter(cfg_it),
    .cfg_alpha(cfg_a), .cfg_one_minus_alpha(cfg_1a), .cfg_alpha_over_v(cfg_aov),
    .cfg_pers,
    .coo_req_valid, .coo_req_ready, .coo_req_addr, .coo_rsp_valid,
    .coo_rsp_x, .coo_rsp_y, .coo_rsp_val,
    .dng_req_valid, .dng_req_ready, .dng_req_addr, .dng_rsp_valid, .dng_rsp_data,
    .out_valid, .out_ready, .out_blk, .out_data);

  // ---------------- graph (host side)
  int     ne, np;
  int     ex [EMAX], ey [EMAX];
  longint ev [EMAX];
  int     outdeg [NMAX];
  logic [B*32-1:0] px [PMAX], py [PMAX], pv [PMAX];
  logic [B*32-1:0] dng [NMAX/(B*32)+1];

  function automatic bit hole(int v);   // vertices that receive no edge
    // the holes around 89 and 96 force a packet that spans two blocks and is
    // followed by a jump of several blocks (the store FSM's gap stall)
    return (v >= 82 && v < 89) || (v >= 90 && v < 96) || (v >= 97 && v < 130) ||
           (v >= 250 && v < 262) || (v >= 300 && v < 317) || v >= 394;
  endfunction

  // graph generator with its own fixed-seed LCG, so every run builds the same graph
  int unsigned lcg = 32'd12345;
  function automatic int rnd(int lo, int hi);
    lcg = lcg * 32'd1103515245 + 32'd12345;
    return lo + int'((lcg >> 8) % 32'(hi - lo + 1));
  endfunction

  task automatic build_graph();
    int tx [EMAX], ty [EMAX];
    int n = 0, lane, x0;
    for (int v = 0; v < NV; v++) begin
      int d = (v % 7 == 3) ? 0 : 1 + rnd(0, 3);
      outdeg[v] = d;
      for (int i = 0; i < d; i++) begin
        int t;
        do t = rnd(0, NV - 1); while (hole(t) || t == v);
        tx[n] = t; ty[n] = v; n++;
      end
    end
    // sort by destination (counting order)
    ne = 0;
    for (int x = 0; x < NV; x++)
      for (int i = 0; i < n; i++)
        if (tx[i] == x) begin
          ex[ne] = x; ey[ne] = ty[i]; ev[ne] = ONE / outdeg[ty[i]]; ne++;
        end
    // pack: a new packet when the lane would fall outside [x0, x0+B)
    np = 0; lane = 0; x0 = 0;
    for (int i = 0; i < ne; i++) begin
      if (lane == B || (lane > 0 && ex[i] >= x0 + B)) begin
        for (; lane < B; lane++) begin
          px[np][32*lane +: 32] = x0; py[np][32*lane +: 32] = 0; pv[np][32*lane +: 32] = 0;
        end
        np++; lane = 0;
      end
      if (lane == 0) x0 = ex[i];
      px[np][32*lane +: 32] = ex[i]; py[np][32*lane +: 32] = ey[i];
      pv[np][32*lane +: 32] = 32'(ev[i]);
      lane++;
    end
    if (lane > 0) begin
      for (; lane < B; lane++) begin
        px[np][32*lane +: 32] = x0; py[np][32*lane +: 32] = 0; pv[np][32*lane +: 32] = 0;
      end
      np++;
    end
    for (int w = 0; w <= NMAX/(B*32); w++) dng[w] = '0;
    for (int v = 0; v < NV; v++) if (outdeg[v] == 0) dng[v / (B*32)][v % (B*32)] = 1'b1;
  endtask

  // ---------------- DRAM model
  int  lat_min, lat_max, rdy_pct;
  longint cq_due [$]; int cq_addr [$];
  longint dq_due [$]; int dq_addr [$];
  always @(posedge clk) begin
    coo_req_ready <= ($urandom_range(0, 99) < rdy_pct);
    dng_req_ready <= ($urandom_range(0, 99) < rdy_pct);
    if (coo_req_valid && coo_req_ready) begin
      cq_due.push_back(cycle + longint'($urandom_range(lat_min, lat_max)));
      cq_addr.push_back(coo_req_addr);
    end
    if (dng_req_valid && dng_req_ready) begin
      dq_due.push_back(cycle + longint'($urandom_range(lat_min, lat_max)));
      dq_addr.push_back(dng_req_addr);
    end
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

  // ---------------- reference model (same fixed-point recurrence)
  longint ref_p [KAPPA][NMAX];
  task automatic reference(input int pers [KAPPA]);
    longint p2 [KAPPA][NMAX];
    longint a = longint'(cfg_a), a1 = longint'(cfg_1a), aov = longint'(cfg_aov);
    for (int k = 0; k < KAPPA; k++)
      for (int i = 0; i < NV; i++) ref_p[k][i] = (i == pers[k]) ? ONE : 0;
    for (int it = 0; it < ITERS; it++) begin
      for (int k = 0; k < KAPPA; k++) begin
        longint s = 0, sc;
        for (int i = 0; i < NV; i++) if (outdeg[i] == 0) s += ref_p[k][i];
        sc = (s * aov) >> FRAC;
        if (sc > MASK) sc = MASK;
        for (int i = 0; i < NV; i++) p2[k][i] = 0;
        for (int e = 0; e < ne; e++) p2[k][ex[e]] = (p2[k][ex[e]] + ((ev[e] * ref_p[k][ey[e]]) >> FRAC)) & MASK;
        for (int i = 0; i < NV; i++)
          ref_p[k][i] = (((a * p2[k][i]) >> FRAC) + sc + ((i == pers[k]) ? a1 : 0)) & MASK;
      end
    end
  endtask

  // ---------------- result capture
  int out_pct;
  longint got [KAPPA][NMAX];
  int nblk_out;
  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 99) < out_pct);
    if (out_valid && out_ready) begin
      for (int j = 0; j < B; j++)
        for (int k = 0; k < KAPPA; k++)
          if (int'(out_blk) * B + j < NMAX) got[k][int'(out_blk) * B + j] = longint'(out_data[j][k]);
      nblk_out++;
    end
  end

  // ---------------- mechanism counters
  int n_gap_stall, n_gap_skip, n_same, n_next, n_flush2, n_pipe_stall, n_dram_bp,
      n_out_bp, n_multi, n_dangling_words, n_init;
  longint spmv_cycles, spmv_t0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_store.stall) n_gap_stall++;
    if (dut.u_store.in_valid && dut.u_store.in_ready && dut.u_store.gap) n_gap_skip++;
    if (dut.u_store.in_valid && dut.u_store.same) n_same++;
    if (dut.u_store.in_valid && dut.u_store.next) n_next++;
    if (dut.u_store.state == 2'd2) n_flush2++;
    if (!dut.en && dut.ag_valid) n_pipe_stall++;
    if (coo_req_valid && !coo_req_ready) n_dram_bp++;
    if (out_valid && !out_ready) n_out_bp++;
    if (dng_rsp_valid && dng_rsp_data != '0) n_dangling_words++;
    if (dut.init_start) n_init++;
    if (dut.sc_valid && dut.en)
      for (int j = 1; j < B; j++) if (dut.sc_x[j] == dut.sc_x[j-1] && dut.sc_dp[0][j] != 0) begin n_multi++; break; end
    if (dut.spmv_start) spmv_t0 = cycle;
    if (dut.spmv_done && cycle - spmv_t0 > spmv_cycles) spmv_cycles = cycle - spmv_t0;
  end

  task automatic run_op(input int pers [KAPPA], input int lmin, input int lmax, input int rpct, input int opct,
                        input bit check_rate);
    int stalls0;
    lat_min = lmin; lat_max = lmax; rdy_pct = rpct; out_pct = opct;
    for (int k = 0; k < KAPPA; k++) begin
      cfg_pers[k] = pers[k];
      for (int i = 0; i < NMAX; i++) got[k][i] = -1;
    end
    nblk_out = 0; spmv_cycles = 0; stalls0 = n_gap_stall;
    reference(pers);
    @(posedge clk); start <= 1'b1; @(posedge clk); start <= 1'b0;
    wait (done); @(posedge clk);
    checks++;
    if (nblk_out != (NV + B - 1) / B) begin
      failures++; $display("FAIL: %0d result blocks, expected %0d", nblk_out, (NV + B - 1) / B);
    end
    for (int k = 0; k < KAPPA; k++) begin
      real sum = 0;
      int bad = 0;
      for (int i = 0; i < NV; i++) begin
        checks++;
        if (got[k][i] != ref_p[k][i]) begin
          failures++; bad++;
          if (bad < 4) $display("FAIL: P[%0d][%0d] = %0d, expected %0d", k, i, got[k][i], ref_p[k][i]);
        end
        sum += real'(got[k][i]) / real'(ONE);
      end
      checks++;
      if (sum < 1.0 - real'(ITERS) * real'(ne + 3 * NV) / real'(ONE) || sum > 1.001) begin failures++; $display("FAIL: vector %0d sums to %f", k, sum); end
    end
    if (check_rate) begin
      // one packet (B edges) per cycle, plus gap stalls and pipeline fill/flush
      checks++;
      if (spmv_cycles > longint'(np) + longint'(n_gap_stall - stalls0) / ITERS + 12) begin
        failures++; $display("FAIL: SpMV took %0d cycles for %0d packets", spmv_cycles, np);
      end
      $display("SpMV phase: %0d cycles for %0d packets (%0d edges)", spmv_cycles, np, ne);
    end
  endtask

  initial begin
    int pers [KAPPA];
    fin = 1'b0; checks = 0; failures = 0;
    cfg_it = ITERS;
    cfg_a  = W'(longint'(0.85 * real'(ONE)));
    cfg_1a = W'(ONE - longint'(cfg_a));
    cfg_nv = NV;
    cfg_aov = W'(longint'(cfg_a) / NV);
    lat_min = 2; lat_max = 2; rdy_pct = 100; out_pct = 100;
    build_graph();
    cfg_np = np;
    $display("graph: %0d vertices, %0d edges, %0d packets", NV, ne, np);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    for (int k = 0; k < KAPPA; k++) pers[k] = (k * 53 + 7) % NV;
    run_op(pers, 2, 2, 100, 100, 1'b1);
    for (int k = 0; k < KAPPA; k++) pers[k] = $urandom_range(0, NV - 1);
    pers[0] = 3;   // a dangling vertex as personalization vertex
    run_op(pers, 1, 9, 70, 60, 1'b0);
    // every mechanism must have happened
    begin
      int cnt [11];
      string nm [11];
      cnt = '{n_gap_stall, n_gap_skip, n_same, n_next, n_flush2, n_pipe_stall,
                       n_dram_bp, n_out_bp, n_multi, n_dangling_words, n_init};
      nm = '{"gap stall", "gap skip", "same-block accumulate", "next-block shift",
                         "res2 flush", "pipeline stall", "DRAM back-pressure", "output back-pressure",
                         "multi-edge reduction", "dangling bitmap", "init pass"};
      for (int i = 0; i < 11; i++) begin
        checks++;
        $display("mechanism %-22s : %0d", nm[i], cnt[i]);
        if (cnt[i] == 0) begin failures++; $display("FAIL: mechanism %s never happened", nm[i]); end
      end
    end
    $display("Q1.%0d: checks=%0d failures=%0d", FRAC, checks, failures);
    fin = 1'b1;
  end
endmodule
