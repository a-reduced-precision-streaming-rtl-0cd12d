// ppr_top: Personalized PageRank accelerator built around a streaming COO
// sparse matrix-vector multiply in reduced-precision fixed point.
//
// Two on-chip PPR buffers hold P1 (the current KAPPA PPR vectors) and P2 (the
// SpMV result). The SpMV is a four-stage stream: coo_packet_reader fetches B
// edges per cycle from DRAM, scatter_core gathers P1 at the sources and forms
// val * P1, aggregation_core reduces edges with the same destination, and
// store_fsm writes finished, aligned blocks of P2. One stall signal, the store
// FSM's in_ready, advances the scatter and aggregation registers and pops the
// reader. Around the SpMV, scaling_unit computes the dangling factor,
// update_unit forms P1 = alpha*P2 + scaling + (1-alpha)*V_bar (and the initial
// P1 = V_bar), and ppr_writeback streams the result out. ppr_controller runs
// the phases; the buffer ports are multiplexed by phase.
//
// Interface: the cfg_* inputs must be stable from start until done. The coo_*
// and dng_* ports read the COO arrays and the dangling bitmap from DRAM
// (request channel with valid/ready, response channel without back-pressure,
// answers in order). out_* carries the result, one block per cycle. All
// fixed-point values are unsigned Q1.FRAC. The edges must be sorted by
// destination and packed so that every lane of a packet lies in
// [x[0], x[0]+B), padding with val = 0.
module ppr_top #(
  parameter int unsigned B     = ppr_pkg::B,
  parameter int unsigned KAPPA = ppr_pkg::KAPPA,
  parameter int unsigned W     = ppr_pkg::W,
  parameter int unsigned FRAC  = ppr_pkg::FRAC,
  parameter int unsigned MAX_V = ppr_pkg::MAX_V,
  localparam int unsigned P_SIZE = B * 32,
  localparam int unsigned AW   = $clog2(MAX_V),
  localparam int unsigned DEPTH = (MAX_V + B - 1) / B,
  localparam int unsigned BW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  output logic                            busy,
  output logic                            done,
  output ppr_pkg::phase_e                          phase,
  output logic [31:0]                     iter,
  // configuration
  input  logic [31:0]                     cfg_num_vertices,
  input  logic [31:0]                     cfg_num_packets,
  input  logic [31:0]                     cfg_max_iter,
  input  logic [W-1:0]                    cfg_alpha,
  input  logic [W-1:0]                    cfg_one_minus_alpha,
  input  logic [W-1:0]                    cfg_alpha_over_v,
  input  logic [KAPPA-1:0][31:0]          cfg_pers,
  // DRAM: COO packets
  output logic                            coo_req_valid,
  input  logic                            coo_req_ready,
  output logic [31:0]                     coo_req_addr,
  input  logic                            coo_rsp_valid,
  input  logic [P_SIZE-1:0]               coo_rsp_x,
  input  logic [P_SIZE-1:0]               coo_rsp_y,
  input  logic [P_SIZE-1:0]               coo_rsp_val,
  // DRAM: dangling bitmap
  output logic                            dng_req_valid,
  input  logic                            dng_req_ready,
  output logic [31:0]                     dng_req_addr,
  input  logic                            dng_rsp_valid,
  input  logic [P_SIZE-1:0]               dng_rsp_data,
  // result stream
  output logic                            out_valid,
  input  logic                            out_ready,
  output logic [BW-1:0]                   out_blk,
  output logic [B-1:0][KAPPA-1:0][W-1:0]  out_data
);
  typedef logic [B-1:0][KAPPA-1:0][W-1:0] blkdata_t;
  typedef logic [B-1:0][AW-1:0]           lanes_t;

  // ---------------- controller
  logic init_start, scale_start, spmv_start, update_start, write_start;
  logic update_done, scale_done, spmv_done, write_done;

  ppr_controller u_ctrl (
    .clk, .rst_n, .start, .max_iter(cfg_max_iter), .num_packets(cfg_num_packets),
    .phase, .iter, .busy, .done,
    .init_start, .scale_start, .spmv_start, .update_start, .write_start,
    .update_done, .scale_done, .spmv_done, .write_done);

  // ---------------- PPR buffers
  logic     p1_re, p1_we, p2_re, p2_we;
  lanes_t   p1_raddr, p2_raddr;
  blkdata_t p1_rdata, p2_rdata, p1_wdata, p2_wdata;
  logic [BW-1:0] p1_wblk, p2_wblk;

  ppr_buffer #(.B(B), .KAPPA(KAPPA), .W(W), .MAX_V(MAX_V)) u_p1 (
    .clk, .re(p1_re), .rd_addr(p1_raddr), .rd_data(p1_rdata),
    .we(p1_we), .wr_blk(p1_wblk), .wr_data(p1_wdata));
  ppr_buffer #(.B(B), .KAPPA(KAPPA), .W(W), .MAX_V(MAX_V)) u_p2 (
    .clk, .re(p2_re), .rd_addr(p2_raddr), .rd_data(p2_rdata),
    .we(p2_we), .wr_blk(p2_wblk), .wr_data(p2_wdata));

  // ---------------- SpMV data-flow
  logic                              en;
  logic                              rdr_valid, rdr_last;
  logic [B-1:0][31:0]                rdr_x, rdr_y, rdr_val;
  logic                              sc_valid, sc_last, sc_re;
  logic [B-1:0][31:0]                sc_x;
  logic [KAPPA-1:0][B-1:0][W-1:0]    sc_dp;
  lanes_t                            sc_raddr;
  logic                              ag_valid, ag_hi, ag_last;
  logic [31:0]                       ag_xs;
  logic [KAPPA-1:0][2*B-1:0][W-1:0]  ag_agg;
  logic                              st_we;
  logic [BW-1:0]                     st_blk;
  blkdata_t                          st_data;

  coo_packet_reader #(.B(B), .P_SIZE(P_SIZE)) u_reader (
    .clk, .rst_n, .start(spmv_start), .num_packets(cfg_num_packets),
    .req_valid(coo_req_valid), .req_ready(coo_req_ready), .req_addr(coo_req_addr),
    .rsp_valid(coo_rsp_valid), .rsp_x(coo_rsp_x), .rsp_y(coo_rsp_y), .rsp_val(coo_rsp_val),
    .out_valid(rdr_valid), .out_ready(en), .out_x(rdr_x), .out_y(rdr_y),
    .out_val(rdr_val), .out_last(rdr_last));

  scatter_core #(.B(B), .KAPPA(KAPPA), .W(W), .FRAC(FRAC), .MAX_V(MAX_V)) u_scatter (
    .clk, .rst_n, .en, .in_valid(rdr_valid), .in_x(rdr_x), .in_y(rdr_y),
    .in_val(rdr_val), .in_last(rdr_last),
    .rd_re(sc_re), .rd_addr(sc_raddr), .rd_data(p1_rdata),
    .out_valid(sc_valid), .out_x(sc_x), .out_dp(sc_dp), .out_last(sc_last));

  aggregation_core #(.B(B), .KAPPA(KAPPA), .W(W)) u_agg (
    .clk, .rst_n, .en, .in_valid(sc_valid), .in_x(sc_x), .in_dp(sc_dp),
    .in_last(sc_last), .out_valid(ag_valid), .out_xs(ag_xs), .out_agg(ag_agg),
    .out_hi(ag_hi), .out_last(ag_last));

  store_fsm #(.B(B), .KAPPA(KAPPA), .W(W), .MAX_V(MAX_V)) u_store (
    .clk, .rst_n, .start(spmv_start), .in_valid(ag_valid), .in_ready(en),
    .in_xs(ag_xs), .in_agg(ag_agg), .in_hi(ag_hi), .in_last(ag_last),
    .wr_en(st_we), .wr_blk(st_blk), .wr_data(st_data), .done(spmv_done),
    .stall());

  // ---------------- scaling, update, write-back
  logic                       sl_re;
  lanes_t                     sl_raddr;
  logic [KAPPA-1:0][W-1:0]    scaling;

  scaling_unit #(.B(B), .KAPPA(KAPPA), .W(W), .FRAC(FRAC), .P_SIZE(P_SIZE), .MAX_V(MAX_V)) u_scale (
    .clk, .rst_n, .start(scale_start), .num_vertices(cfg_num_vertices),
    .alpha_over_v(cfg_alpha_over_v),
    .dreq_valid(dng_req_valid), .dreq_ready(dng_req_ready), .dreq_addr(dng_req_addr),
    .drsp_valid(dng_rsp_valid), .drsp_data(dng_rsp_data),
    .rd_re(sl_re), .rd_addr(sl_raddr), .rd_data(p1_rdata),
    .scaling, .done(scale_done));

  logic          up_we, up_clr;
  logic [BW-1:0] up_blk, up_clr_blk;

  update_unit #(.B(B), .KAPPA(KAPPA), .W(W), .FRAC(FRAC), .MAX_V(MAX_V)) u_update (
    .clk, .rst_n, .start(init_start | update_start), .init_mode(init_start),
    .num_vertices(cfg_num_vertices), .alpha(cfg_alpha),
    .one_minus_alpha(cfg_one_minus_alpha), .scaling, .pers(cfg_pers),
    .rd_re(p2_re), .rd_addr(p2_raddr), .rd_data(p2_rdata),
    .p1_we(up_we), .p1_blk(up_blk), .p1_data(p1_wdata),
    .p2_we(up_clr), .p2_blk(up_clr_blk), .done(update_done));

  logic   wb_re;
  lanes_t wb_raddr;

  ppr_writeback #(.B(B), .KAPPA(KAPPA), .W(W), .MAX_V(MAX_V)) u_wb (
    .clk, .rst_n, .start(write_start), .num_vertices(cfg_num_vertices),
    .rd_re(wb_re), .rd_addr(wb_raddr), .rd_data(p1_rdata),
    .out_valid, .out_ready, .out_blk, .out_data, .done(write_done));

  // The graph must fit the buffers.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> cfg_num_vertices <= MAX_V)
    else $error("ppr_top: %0d vertices exceed MAX_V = %0d", cfg_num_vertices, MAX_V);

  // ---------------- buffer port multiplexing by phase
  always_comb begin
    unique case (phase)
      ppr_pkg::PH_SPMV:  begin p1_re = sc_re; p1_raddr = sc_raddr; end
      ppr_pkg::PH_SCALE: begin p1_re = sl_re; p1_raddr = sl_raddr; end
      ppr_pkg::PH_WRITE: begin p1_re = wb_re; p1_raddr = wb_raddr; end
      default:  begin p1_re = 1'b0;  p1_raddr = wb_raddr; end
    endcase
    p1_we   = up_we;
    p1_wblk = up_blk;
    if (phase == ppr_pkg::PH_SPMV) begin
      p2_we = st_we;  p2_wblk = st_blk;     p2_wdata = st_data;
    end else begin
      p2_we = up_clr; p2_wblk = up_clr_blk; p2_wdata = '0;
    end
  end
endmodule
