// ppr_buffer: on-chip store for KAPPA PPR vectors of up to MAX_V vertices
// (one of P_t / P_t+1, held in UltraRAM on the target FPGA).
//
// The vertex space is cyclically partitioned over B banks: vertex i lives in
// bank i % B, row i / B, and one row word holds the KAPPA values of that
// vertex. This lets an aligned block of B consecutive vertices be written in a
// single cycle (one write per bank), which is what the store FSM and the
// update pass need. The scatter core also needs B reads at arbitrary vertices
// per cycle; each read lane is a full read port over all banks (a synthesis
// tool replicates the memory to build it). Reads are registered: rd_data is
// valid the cycle after re, and holds while re is low, so a stalled pipeline
// keeps its gathered values. Cyclic partitioning and the URAM placement follow
// the paper; the read-port arrangement and the 1-cycle latency are this
// design's choice. B must be a power of two.
module ppr_buffer #(
  parameter int unsigned B     = ppr_pkg::B,
  parameter int unsigned KAPPA = ppr_pkg::KAPPA,
  parameter int unsigned W     = ppr_pkg::W,
  parameter int unsigned MAX_V = ppr_pkg::MAX_V,
  localparam int unsigned AW   = $clog2(MAX_V),
  localparam int unsigned LB   = $clog2(B),
  localparam int unsigned DEPTH = (MAX_V + B - 1) / B,
  localparam int unsigned BW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                               clk,
  input  logic                               re,
  input  logic [B-1:0][AW-1:0]               rd_addr,  // vertex index per lane
  output logic [B-1:0][KAPPA-1:0][W-1:0]     rd_data,
  input  logic                               we,
  input  logic [BW-1:0]                      wr_blk,   // block = vertex / B
  input  logic [B-1:0][KAPPA-1:0][W-1:0]     wr_data   // lane j = vertex blk*B+j
);
  logic [KAPPA*W-1:0] mem [B][DEPTH];

  initial assert ((1 << LB) == B) else $error("ppr_buffer: B must be a power of two");

  always_ff @(posedge clk) begin
    if (we)
      for (int j = 0; j < B; j++) mem[j][wr_blk] <= wr_data[j];
    if (re)
      for (int j = 0; j < B; j++)
        rd_data[j] <= mem[rd_addr[j][LB-1:0]][BW'(rd_addr[j] >> LB)];
  end
endmodule
