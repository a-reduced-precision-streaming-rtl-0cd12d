// scaling_unit: computes the dangling factor of the PPR recurrence,
// scaling[k] = alpha/|V| * sum over dangling vertices i of P_t[k, i],
// for all KAPPA personalization vectors.
//
// The dangling bitmap (bit i set when vertex i has no outgoing edge) is read
// from DRAM in P_SIZE-bit words, as the paper describes; bit b of word w is
// vertex w*P_SIZE + b. For each word the unit reads the P_SIZE/B blocks of
// P_t it covers, one block of B vertices per cycle through lane reads
// blk*B + j, masks the values with the bitmap and accumulates them. Then it
// multiplies each sum by the host-supplied constant alpha/|V| (Q1.FRAC) and
// truncates. The word fetch is not overlapped with the block reads: the pass
// takes about |V|/B cycles plus a DRAM round trip per P_SIZE vertices. The
// accumulators have 8 guard bits; the product saturates to W bits.
module scaling_unit #(
  parameter int unsigned B      = ppr_pkg::B,
  parameter int unsigned KAPPA  = ppr_pkg::KAPPA,
  parameter int unsigned W      = ppr_pkg::W,
  parameter int unsigned FRAC   = ppr_pkg::FRAC,
  parameter int unsigned P_SIZE = ppr_pkg::P_SIZE,
  parameter int unsigned MAX_V  = ppr_pkg::MAX_V,
  localparam int unsigned AW    = $clog2(MAX_V)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic [31:0]                     num_vertices,
  input  logic [W-1:0]                    alpha_over_v,
  // dangling bitmap read port
  output logic                            dreq_valid,
  input  logic                            dreq_ready,
  output logic [31:0]                     dreq_addr,    // word index
  input  logic                            drsp_valid,
  input  logic [P_SIZE-1:0]               drsp_data,
  // P_t block read
  output logic                            rd_re,
  output logic [B-1:0][AW-1:0]            rd_addr,
  input  logic [B-1:0][KAPPA-1:0][W-1:0]  rd_data,
  output logic [KAPPA-1:0][W-1:0]         scaling,
  output logic                            done
);
  localparam int unsigned BPW = P_SIZE / B;          // blocks per bitmap word
  localparam int unsigned SW  = W + 8;               // accumulator width
  localparam int unsigned LBW = $clog2(BPW);

  typedef enum logic [2:0] {S_IDLE, S_REQ, S_WAIT, S_RUN, S_DRAIN, S_FIN} state_e;
  state_e                     state;
  logic [31:0]                word, blk, nblocks;
  logic [LBW-1:0]             sub;
  logic [P_SIZE-1:0]          bits;
  logic                       v1;
  logic [B-1:0]               mask1;
  logic [KAPPA-1:0][SW-1:0]   sum, sum_nx;
  logic [KAPPA-1:0][W-1:0]    scaled;

  assign nblocks   = (num_vertices + 32'(B) - 1) / 32'(B);
  assign dreq_valid = (state == S_REQ);
  assign dreq_addr  = word;
  assign rd_re      = (state == S_RUN);
  always_comb
    for (int j = 0; j < B; j++) rd_addr[j] = AW'(blk * 32'(B) + 32'(j));

  // masked block sum (read issued last cycle) and the final scaling product
  always_comb begin
    sum_nx = sum;
    if (v1)
      for (int k = 0; k < KAPPA; k++)
        for (int j = 0; j < B; j++)
          if (mask1[j]) sum_nx[k] = sum_nx[k] + SW'(rd_data[j][k]);
    for (int k = 0; k < KAPPA; k++) begin
      logic [SW+W-1:0] p;
      p = ({{W{1'b0}}, sum[k]} * {{SW{1'b0}}, alpha_over_v}) >> FRAC;
      scaled[k] = (p >= ((SW+W)'(1) << W)) ? {W{1'b1}} : W'(p);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; v1 <= 1'b0; word <= '0; blk <= '0; sub <= '0;
      sum <= '0; scaling <= '0; mask1 <= '0; bits <= '0;
    end else begin
      done <= 1'b0;
      v1  <= rd_re;
      sum <= sum_nx;
      case (state)
        S_IDLE: if (start) begin
          sum <= '0; word <= '0; blk <= '0;
          state <= (num_vertices == 0) ? S_FIN : S_REQ;
        end
        S_REQ:  if (dreq_ready) state <= S_WAIT;
        S_WAIT: if (drsp_valid) begin bits <= drsp_data; sub <= '0; state <= S_RUN; end
        S_RUN: begin
          for (int j = 0; j < B; j++)
            mask1[j] <= bits[32'(sub) * B + j] && (blk * 32'(B) + 32'(j) < num_vertices);
          blk <= blk + 1;
          sub <= sub + 1'b1;
          if (blk + 1 == nblocks)            state <= S_DRAIN;
          else if (sub == LBW'(BPW - 1)) begin word <= word + 1; state <= S_REQ; end
        end
        S_DRAIN: state <= S_FIN;
        S_FIN: begin
          scaling <= scaled;
          done    <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
