// tb_coo_packet_reader: a DRAM model with in-order responses answers the
// reader's packet requests. Run 1 (ideal memory, ready consumer) checks the
// rate of one packet per cycle; run 2 adds random request back-pressure,
// random latency and a stalling consumer. Every packet must arrive once, in
// order, with the right lanes and with out_last only on the final one.
module tb_coo_packet_reader;
  localparam int B = 8, P = 256, NPK = 40;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [31:0] num_packets = NPK;
  logic req_valid, req_ready, rsp_valid, out_valid, out_ready, out_last;
  logic [31:0] req_addr;
  logic [P-1:0] rsp_x, rsp_y, rsp_val;
  logic [B-1:0][31:0] out_x, out_y, out_val;

  coo_packet_reader #(.B(B), .P_SIZE(P)) dut (.*);

  function automatic logic [P-1:0] word(int a, int arr);
    logic [P-1:0] w;
    for (int j = 0; j < B; j++) w[32*j +: 32] = 32'(a * 1000 + arr * 100 + j);
    return w;
  endfunction

  int lmin = 2, lmax = 2, rpct = 100, opct = 100;
  longint due [$]; int adr [$];
  always @(posedge clk) begin
    req_ready <= ($urandom_range(0, 99) < rpct);
    out_ready <= ($urandom_range(0, 99) < opct);
    if (req_valid && req_ready) begin
      due.push_back(cycle + longint'($urandom_range(lmin, lmax))); adr.push_back(req_addr);
    end
    rsp_valid <= 1'b0;
    if (due.size() > 0 && due[0] <= cycle) begin
      automatic int a = adr.pop_front();
      void'(due.pop_front());
      rsp_valid <= 1'b1;
      rsp_x <= word(a, 0); rsp_y <= word(a, 1); rsp_val <= word(a, 2);
    end
  end

  int got;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_x[3] != 32'(got*1000 + 3) || out_y[5] != 32'(got*1000 + 105) || out_val[7] != 32'(got*1000 + 207)
        || out_last != (got == NPK - 1)) begin
      failures++; $display("FAIL: packet %0d wrong (x3=%0d last=%0d)", got, out_x[3], out_last);
    end
    got++;
  end

  task automatic run(int l0, int l1, int rp, int op, bit rate);
    longint t0;
    lmin = l0; lmax = l1; rpct = rp; opct = op; got = 0;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0; t0 = cycle;
    while (got < NPK) @(posedge clk);
    repeat (20) @(posedge clk);
    checks++;
    if (got != NPK) begin failures++; $display("FAIL: %0d packets", got); end
    if (rate) begin
      checks++;
      if (cycle - 20 - t0 > NPK + 8) begin failures++; $display("FAIL: %0d cycles for %0d packets", cycle - 20 - t0, NPK); end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1; repeat (3) @(posedge clk);
    checks++;
    if (req_valid) begin failures++; $display("FAIL: requests before start"); end
    run(2, 2, 100, 100, 1);
    run(1, 7, 60, 50, 0);
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
