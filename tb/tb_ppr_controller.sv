// tb_ppr_controller: unit models answer each start pulse with a done pulse
// after a random delay. The controller must issue INIT once, then SCALE,
// SPMV, UPDATE in that order max_iter times (SPMV skipped when there are no
// packets), then WRITE, and pulse done once; iter must count iterations.
module tb_ppr_controller;
  import ppr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic [31:0] max_iter, num_packets, iter;
  phase_e phase;
  logic init_start, scale_start, spmv_start, update_start, write_start;
  logic update_done, scale_done, spmv_done, write_done;

  ppr_controller dut (.*);

  // each unit answers after a random delay
  int dly_u, dly_s, dly_p, dly_w;
  always @(posedge clk) begin
    update_done <= 0; scale_done <= 0; spmv_done <= 0; write_done <= 0;
    if (init_start || update_start) dly_u <= $urandom_range(1, 6);
    else if (dly_u > 0) begin dly_u <= dly_u - 1; if (dly_u == 1) update_done <= 1; end
    if (scale_start) dly_s <= $urandom_range(1, 6);
    else if (dly_s > 0) begin dly_s <= dly_s - 1; if (dly_s == 1) scale_done <= 1; end
    if (spmv_start) dly_p <= $urandom_range(1, 6);
    else if (dly_p > 0) begin dly_p <= dly_p - 1; if (dly_p == 1) spmv_done <= 1; end
    if (write_start) dly_w <= $urandom_range(1, 6);
    else if (dly_w > 0) begin dly_w <= dly_w - 1; if (dly_w == 1) write_done <= 1; end
  end

  string trace;
  always @(posedge clk) if (rst_n) begin
    if (init_start)   trace = {trace, "I"};
    if (scale_start)  trace = {trace, "S"};
    if (spmv_start)   trace = {trace, "P"};
    if (update_start) trace = {trace, "U"};
    if (write_start)  trace = {trace, "W"};
    if (done)         trace = {trace, "D"};
  end

  task automatic run(int it, int np);
    string e = "I";
    for (int i = 0; i < it; i++) e = {e, (np > 0) ? "SPU" : "SU"};
    e = {e, "WD"};
    max_iter = it; num_packets = np; trace = "";
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL: not busy after start"); end
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (trace != e) begin failures++; $display("FAIL: trace %s, expected %s", trace, e); end
    checks++;
    if (iter != it || busy) begin failures++; $display("FAIL: iter %0d busy %0d", iter, busy); end
  endtask

  initial begin
    start = 0; max_iter = 0; num_packets = 0;
    dly_u = 0; dly_s = 0; dly_p = 0; dly_w = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(10, 5);
    run(3, 0);
    run(0, 7);
    run(1, 1);
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
