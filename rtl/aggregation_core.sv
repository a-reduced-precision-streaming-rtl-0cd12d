// aggregation_core: step 3 of the SpMV, B parallel reductions.
//
// A packet may hold several edges that end in the same vertex. Reduction b1
// (0 <= b1 < B) sums the point-wise results dp[k][b2] of every lane b2 whose
// destination x[b2] equals x[0] + b1, and places the sum at position
// x[0] % B + b1 of a 2B-entry aggregate agg_res. The aggregate is aligned to
// the block base x_s = floor(x[0]/B)*B, so its lower half belongs to block x_s
// and its upper half to block x_s + B. This is the paper's formulation; it
// requires that the edges are sorted by x and that every lane of a packet
// satisfies x[0] <= x[j] < x[0] + B (an assertion checks it; the host packer
// pads packets with val = 0 edges to guarantee it). out_hi, which tells the
// store FSM that the upper half received an edge, is this design's addition.
// One registered stage, advanced by en.
module aggregation_core #(
  parameter int unsigned B     = ppr_pkg::B,
  parameter int unsigned KAPPA = ppr_pkg::KAPPA,
  parameter int unsigned W     = ppr_pkg::W
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              en,
  input  logic                              in_valid,
  input  logic [B-1:0][31:0]                in_x,
  input  logic [KAPPA-1:0][B-1:0][W-1:0]    in_dp,
  input  logic                              in_last,
  output logic                              out_valid,
  output logic [31:0]                       out_xs,
  output logic [KAPPA-1:0][2*B-1:0][W-1:0]  out_agg,
  output logic                              out_hi,
  output logic                              out_last
);
  localparam int unsigned LB = $clog2(B);

  logic [LB-1:0]                        off;
  logic [31:0]                          xs;
  logic [KAPPA-1:0][2*B-1:0][W-1:0]     agg;
  logic                                 hi;

  assign off = in_x[0][LB-1:0];
  assign xs  = {in_x[0][31:LB], {LB{1'b0}}};

  always_comb begin
    agg = '0;
    hi  = 1'b0;
    for (int b1 = 0; b1 < B; b1++)
      for (int k = 0; k < KAPPA; k++)
        for (int b2 = 0; b2 < B; b2++)
          if (in_x[b2] == in_x[0] + 32'(b1))
            agg[k][32'(off) + b1] = agg[k][32'(off) + b1] + in_dp[k][b2];
    for (int b2 = 0; b2 < B; b2++)
      if (in_x[b2] - xs >= 32'(B)) hi = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  out_valid <= 1'b0;
    else if (en) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (en) begin
      out_xs   <= xs;
      out_agg  <= agg;
      out_hi   <= hi;
      out_last <= in_last;
    end
  end

  // Packing rule the reductions rely on.
  for (genvar j = 0; j < B; j++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      en && in_valid |-> (in_x[j] >= in_x[0]) && (in_x[j] - in_x[0] < 32'(B)))
      else $error("aggregation_core: lane %0d outside [x[0], x[0]+B)", j);
  end
endmodule
