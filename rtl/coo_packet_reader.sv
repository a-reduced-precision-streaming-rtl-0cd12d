// coo_packet_reader: first stage of the streaming SpMV. It fetches the COO
// graph from DRAM one packet at a time and hands out B edges per cycle.
//
// A packet is three P_SIZE-bit words, one from each of the x (destination),
// y (source) and val arrays; lane j of a word is bits [32j+31:32j]. After a
// start pulse (and only then) the reader issues read requests for packets 0 .. num_packets-1
// on a valid/ready request channel. The DRAM answers in request order on a
// response channel that cannot be stalled, so the reader keeps at most
// FIFO_DEPTH packets outstanding-or-buffered; responses land in a small FIFO
// (the "local buffers" x, y, val) that drains into the out_* stream under
// valid/ready. out_last marks the final packet. Reading packets as P_SIZE
// words and B edges per cycle follows the paper; fetching the three arrays in
// lockstep, the FIFO and the handshakes are this design's choice.
module coo_packet_reader #(
  parameter int unsigned B          = ppr_pkg::B,
  parameter int unsigned P_SIZE     = ppr_pkg::P_SIZE,
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [31:0]               num_packets,
  // DRAM request / response
  output logic                      req_valid,
  input  logic                      req_ready,
  output logic [31:0]               req_addr,     // packet index
  input  logic                      rsp_valid,
  input  logic [P_SIZE-1:0]         rsp_x,
  input  logic [P_SIZE-1:0]         rsp_y,
  input  logic [P_SIZE-1:0]         rsp_val,
  // edge packet stream
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [B-1:0][31:0]        out_x,
  output logic [B-1:0][31:0]        out_y,
  output logic [B-1:0][31:0]        out_val,
  output logic                      out_last
);
  localparam int unsigned FW = $clog2(FIFO_DEPTH + 1);
  localparam int unsigned PW = $clog2(FIFO_DEPTH);

  typedef struct packed {
    logic [P_SIZE-1:0] x, y, val;
    logic              last;
  } pkt_t;

  pkt_t            fifo [FIFO_DEPTH];
  logic [PW-1:0]   wptr, rptr;
  logic [FW-1:0]   count;        // packets in the FIFO
  logic [FW-1:0]   outstanding;  // requests not yet answered
  logic [31:0]     req_cnt, rsp_cnt;
  logic            push, pop;
  logic            active;       // between start and the last request

  assign req_addr  = req_cnt;
  assign req_valid = active && (req_cnt < num_packets) && ((count + outstanding) < FW'(FIFO_DEPTH));
  assign push      = rsp_valid;
  assign pop       = out_valid && out_ready;
  assign out_valid = (count != '0);
  always_comb begin
    for (int j = 0; j < B; j++) begin
      out_x[j]   = fifo[rptr].x[32*j +: 32];
      out_y[j]   = fifo[rptr].y[32*j +: 32];
      out_val[j] = fifo[rptr].val[32*j +: 32];
    end
    out_last = fifo[rptr].last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; count <= '0; outstanding <= '0;
      req_cnt <= '0; rsp_cnt <= '0; active <= 1'b0;
    end else if (start) begin
      wptr <= '0; rptr <= '0; count <= '0; outstanding <= '0;
      req_cnt <= '0; rsp_cnt <= '0; active <= 1'b1;
    end else begin
      if (req_valid && req_ready) req_cnt <= req_cnt + 1;
      if (req_valid && req_ready && req_cnt + 1 == num_packets) active <= 1'b0;
      if (push) begin
        rsp_cnt <= rsp_cnt + 1;
        wptr    <= (wptr == PW'(FIFO_DEPTH - 1)) ? '0 : wptr + 1'b1;
      end
      if (pop) rptr <= (rptr == PW'(FIFO_DEPTH - 1)) ? '0 : rptr + 1'b1;
      count       <= count + FW'(push) - FW'(pop);
      outstanding <= outstanding + FW'(req_valid && req_ready) - FW'(push);
    end
  end

  always_ff @(posedge clk)
    if (push) fifo[wptr] <= '{x: rsp_x, y: rsp_y, val: rsp_val, last: (rsp_cnt == num_packets - 1)};

  // A response only ever answers an outstanding request, and never overflows.
  assert property (@(posedge clk) disable iff (!rst_n) rsp_valid |-> outstanding != '0);
  assert property (@(posedge clk) disable iff (!rst_n) push |-> count < FW'(FIFO_DEPTH) || pop);
endmodule
