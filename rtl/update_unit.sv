// update_unit: the block-wise vector pass that closes each PPR iteration,
//   P1[k,i] = alpha * P2[k,i] + scaling[k] + (1 - alpha) * [i == pers[k]],
// and, in init mode, the start of the operation, P1[k,i] = [i == pers[k]]
// (1.0 on the personalization vertex, 0 elsewhere).
//
// It walks the blocks 0 .. ceil(|V|/B)-1, one block of B vertices x KAPPA
// vectors per cycle: the P2 block is read in the issue cycle, and in the
// following cycle the new P1 block is written and the same P2 block is
// written back as zero, so P2 is clean for the next SpMV (whose store FSM
// only writes the blocks that receive edges). Vertices at or above |V| are
// written as 0. alpha, 1 - alpha and the per-vector scaling are unsigned
// Q1.FRAC; the alpha product is truncated. The recurrence is the paper's;
// clearing P2 inside this pass and the runtime constants are this design's
// choices. done pulses one cycle after the last write.
module update_unit #(
  parameter int unsigned B     = ppr_pkg::B,
  parameter int unsigned KAPPA = ppr_pkg::KAPPA,
  parameter int unsigned W     = ppr_pkg::W,
  parameter int unsigned FRAC  = ppr_pkg::FRAC,
  parameter int unsigned MAX_V = ppr_pkg::MAX_V,
  localparam int unsigned AW   = $clog2(MAX_V),
  localparam int unsigned DEPTH = (MAX_V + B - 1) / B,
  localparam int unsigned BW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic                            init_mode,
  input  logic [31:0]                     num_vertices,
  input  logic [W-1:0]                    alpha,
  input  logic [W-1:0]                    one_minus_alpha,
  input  logic [KAPPA-1:0][W-1:0]         scaling,
  input  logic [KAPPA-1:0][31:0]          pers,
  // P2 block read
  output logic                            rd_re,
  output logic [B-1:0][AW-1:0]            rd_addr,
  input  logic [B-1:0][KAPPA-1:0][W-1:0]  rd_data,
  // P1 block write
  output logic                            p1_we,
  output logic [BW-1:0]                   p1_blk,
  output logic [B-1:0][KAPPA-1:0][W-1:0]  p1_data,
  // P2 clear
  output logic                            p2_we,
  output logic [BW-1:0]                   p2_blk,
  output logic                            done
);
  localparam logic [W-1:0] ONE = W'(1) << FRAC;

  logic        busy, mode, v1;
  logic [31:0] blk, blk1, nblocks;

  assign nblocks = (num_vertices + 32'(B) - 1) / 32'(B);
  assign rd_re   = busy;
  always_comb
    for (int j = 0; j < B; j++) rd_addr[j] = AW'(blk * 32'(B) + 32'(j));

  assign p1_we  = v1;
  assign p1_blk = BW'(blk1);
  assign p2_we  = v1;
  assign p2_blk = BW'(blk1);

  always_comb
    for (int j = 0; j < B; j++)
      for (int k = 0; k < KAPPA; k++) begin
        logic [31:0]    idx;
        logic [W-1:0]   prod;
        idx  = blk1 * 32'(B) + 32'(j);
        prod = W'(({{W{1'b0}}, alpha} * {{W{1'b0}}, rd_data[j][k]}) >> FRAC);
        if (idx >= num_vertices)
          p1_data[j][k] = '0;
        else if (mode)
          p1_data[j][k] = (idx == pers[k]) ? ONE : '0;
        else
          p1_data[j][k] = W'(prod) + scaling[k] + ((idx == pers[k]) ? one_minus_alpha : '0);
      end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; mode <= 1'b0; v1 <= 1'b0; blk <= '0; blk1 <= '0; done <= 1'b0;
    end else begin
      done <= v1 && !busy;
      v1   <= busy;
      blk1 <= blk;
      if (start && !busy) begin
        busy <= (num_vertices != 0);
        mode <= init_mode;
        blk  <= '0;
        if (num_vertices == 0) done <= 1'b1;
      end else if (busy) begin
        blk <= blk + 1;
        if (blk + 1 == nblocks) busy <= 1'b0;
      end
    end
  end
endmodule
