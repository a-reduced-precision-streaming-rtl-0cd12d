// store_fsm: step 4 of the SpMV, the finite-state machine that stores the
// aggregated contributions into P_t+1.
//
// It keeps two B-wide accumulators per personalization vector, res1 for the
// current block x_s_old and res2 for the block after it. For each aggregate
// with block base x_s:
//   * first aggregate of a pass: res1 = agg[0:B), res2 = agg[B:2B);
//   * x_s == x_s_old: res1 += agg[0:B), res2 += agg[B:2B);
//   * x_s == x_s_old + B: write res1 to block x_s_old, res1 = res2 + agg[0:B),
//     res2 = agg[B:2B);
//   * x_s further ahead: write res1; if res2 holds data it is moved into res1
//     and x_s_old advanced by B while the input is stalled for one cycle (so
//     res2 is written on its own next cycle); otherwise res1/res2 are loaded
//     from the aggregate directly.
// After the aggregate flagged last, res1 and then (if used) res2 are flushed
// and done pulses. Every block of P_t+1 is therefore written exactly once,
// with an aligned write of B values, and never read-modify-written. The first
// three cases are the paper's algorithm; the stall for a gap and the final
// flush are this design's additions, which keep the result right when the
// destination indices skip a whole block. in_ready is the stall signal of the
// SpMV pipeline. Blocks that receive no edge are not written; they keep the 0
// the update pass left there.
module store_fsm #(
  parameter int unsigned B     = ppr_pkg::B,
  parameter int unsigned KAPPA = ppr_pkg::KAPPA,
  parameter int unsigned W     = ppr_pkg::W,
  parameter int unsigned MAX_V = ppr_pkg::MAX_V,
  localparam int unsigned LB   = $clog2(B),
  localparam int unsigned DEPTH = (MAX_V + B - 1) / B,
  localparam int unsigned BW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,     // begins a pass
  input  logic                              in_valid,
  output logic                              in_ready,
  input  logic [31:0]                       in_xs,
  input  logic [KAPPA-1:0][2*B-1:0][W-1:0]  in_agg,
  input  logic                              in_hi,
  input  logic                              in_last,
  output logic                              wr_en,
  output logic [BW-1:0]                     wr_blk,
  output logic [B-1:0][KAPPA-1:0][W-1:0]    wr_data,
  output logic                              done,
  output logic                              stall      // gap stall (for monitoring)
);
  typedef enum logic [1:0] {S_RUN, S_FLUSH1, S_FLUSH2} state_e;

  state_e                       state;
  logic                         started, res2_used;
  logic [31:0]                  xs_old;
  logic [KAPPA-1:0][B-1:0][W-1:0] res1, res2;
  logic [KAPPA-1:0][B-1:0][W-1:0] lo, hi;
  logic                         same, next, gap;

  always_comb
    for (int k = 0; k < KAPPA; k++)
      for (int j = 0; j < B; j++) begin
        lo[k][j] = in_agg[k][j];
        hi[k][j] = in_agg[k][j + B];
      end

  assign same     = started && (in_xs == xs_old);
  assign next     = started && (in_xs == xs_old + 32'(B));
  assign gap      = started && !same && !next;
  assign stall    = (state == S_RUN) && in_valid && gap && res2_used;
  assign in_ready = (state == S_RUN) && !stall;

  // write port: res1 (or res2 while flushing its own block)
  always_comb begin
    wr_en  = 1'b0;
    wr_blk = BW'(xs_old >> LB);
    for (int j = 0; j < B; j++)
      for (int k = 0; k < KAPPA; k++) wr_data[j][k] = res1[k][j];
    case (state)
      S_RUN:    wr_en = in_valid && started && !same;
      S_FLUSH1: wr_en = 1'b1;
      S_FLUSH2: begin
        wr_en  = 1'b1;
        wr_blk = BW'((xs_old >> LB) + 1);
        for (int j = 0; j < B; j++)
          for (int k = 0; k < KAPPA; k++) wr_data[j][k] = res2[k][j];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_RUN; started <= 1'b0; res2_used <= 1'b0; done <= 1'b0;
      xs_old <= '0; res1 <= '0; res2 <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        state <= S_RUN; started <= 1'b0; res2_used <= 1'b0;
      end else begin
        case (state)
          S_RUN: if (in_valid) begin
            if (!started || (gap && !res2_used)) begin
              res1 <= lo; res2 <= hi; res2_used <= in_hi;
              xs_old <= in_xs; started <= 1'b1;
            end else if (same) begin
              for (int k = 0; k < KAPPA; k++)
                for (int j = 0; j < B; j++) begin
                  res1[k][j] <= res1[k][j] + lo[k][j];
                  res2[k][j] <= res2[k][j] + hi[k][j];
                end
              res2_used <= res2_used | in_hi;
            end else if (next) begin
              for (int k = 0; k < KAPPA; k++)
                for (int j = 0; j < B; j++) res1[k][j] <= res2[k][j] + lo[k][j];
              res2 <= hi; res2_used <= in_hi; xs_old <= in_xs;
            end else begin  // gap with res2 in use: stall one cycle
              res1 <= res2; res2 <= '0; res2_used <= 1'b0;
              xs_old <= xs_old + 32'(B);
            end
            if (in_ready && in_last) state <= S_FLUSH1;
          end
          S_FLUSH1: if (res2_used) state <= S_FLUSH2;
                    else begin state <= S_RUN; started <= 1'b0; done <= 1'b1; end
          S_FLUSH2: begin state <= S_RUN; started <= 1'b0; res2_used <= 1'b0; done <= 1'b1; end
          default:  state <= S_RUN;
        endcase
      end
    end
  end

  // Edges must arrive sorted by destination.
  assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && started && state == S_RUN |-> in_xs >= xs_old)
    else $error("store_fsm: destination blocks out of order");
endmodule
