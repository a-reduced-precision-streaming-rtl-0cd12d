// scatter_core: step 2 of the SpMV. For each edge packet it gathers the
// current PPR values P_t[k, y[j]] of the B source vertices, for all KAPPA
// personalization vectors at once, and forms the point-wise contributions
// dp[k][j] = val[j] * P_t[k, y[j]].
//
// Stage 1 presents the B source indices to the P_t buffer as the packet is
// accepted; the buffer's registered read returns the values one cycle later,
// when the packet sits in the stage-1 register. Stage 2 registers the
// products. The whole pipeline advances only when en is high (a single stall
// signal from the store FSM), so gathered data is never lost. val is an
// unsigned Q1.FRAC number in the low W bits of its 32-bit slot; each product
// is truncated back to Q1.FRAC, as the paper's quantization prescribes.
// Padding lanes carry val = 0 and so contribute nothing.
module scatter_core #(
  parameter int unsigned B     = ppr_pkg::B,
  parameter int unsigned KAPPA = ppr_pkg::KAPPA,
  parameter int unsigned W     = ppr_pkg::W,
  parameter int unsigned FRAC  = ppr_pkg::FRAC,
  parameter int unsigned MAX_V = ppr_pkg::MAX_V,
  localparam int unsigned AW   = $clog2(MAX_V)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            en,
  input  logic                            in_valid,
  input  logic [B-1:0][31:0]              in_x,
  input  logic [B-1:0][31:0]              in_y,
  input  logic [B-1:0][31:0]              in_val,
  input  logic                            in_last,
  // gather port to the P_t buffer
  output logic                            rd_re,
  output logic [B-1:0][AW-1:0]            rd_addr,
  input  logic [B-1:0][KAPPA-1:0][W-1:0]  rd_data,
  // point-wise results
  output logic                            out_valid,
  output logic [B-1:0][31:0]              out_x,
  output logic [KAPPA-1:0][B-1:0][W-1:0]  out_dp,
  output logic                            out_last
);
  logic                v1, last1;
  logic [B-1:0][31:0]  x1;
  logic [B-1:0][W-1:0] val1;
  logic [KAPPA-1:0][B-1:0][W-1:0] dp;

  assign rd_re = en;
  always_comb
    for (int j = 0; j < B; j++) rd_addr[j] = in_y[j][AW-1:0];

  always_comb
    for (int k = 0; k < KAPPA; k++)
      for (int j = 0; j < B; j++)
        dp[k][j] = W'(({{W{1'b0}}, val1[j]} * {{W{1'b0}}, rd_data[j][k]}) >> FRAC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; out_valid <= 1'b0;
    end else if (en) begin
      v1 <= in_valid; out_valid <= v1;
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      x1    <= in_x;
      last1 <= in_last;
      for (int j = 0; j < B; j++) val1[j] <= in_val[j][W-1:0];
      out_x    <= x1;
      out_dp   <= dp;
      out_last <= last1;
    end
  end
endmodule
