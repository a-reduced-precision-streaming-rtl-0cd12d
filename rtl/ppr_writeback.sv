// ppr_writeback: streams the final PPR vectors out of the P1 buffer, one
// block (B vertices x KAPPA values) per cycle, on a valid/ready port.
//
// A block read is issued; its data appears on out_data the next cycle with
// out_valid. When the consumer takes it, the next block read is issued in the
// same cycle, so a ready consumer receives one block per cycle; while it
// stalls, re stays low and the buffer holds its read data. The output format
// and the handshake are this design's choice; the paper only says that P1 is
// written to the output. done pulses after the last block is taken.
module ppr_writeback #(
  parameter int unsigned B     = ppr_pkg::B,
  parameter int unsigned KAPPA = ppr_pkg::KAPPA,
  parameter int unsigned W     = ppr_pkg::W,
  parameter int unsigned MAX_V = ppr_pkg::MAX_V,
  localparam int unsigned AW   = $clog2(MAX_V),
  localparam int unsigned DEPTH = (MAX_V + B - 1) / B,
  localparam int unsigned BW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic [31:0]                     num_vertices,
  output logic                            rd_re,
  output logic [B-1:0][AW-1:0]            rd_addr,
  input  logic [B-1:0][KAPPA-1:0][W-1:0]  rd_data,
  output logic                            out_valid,
  input  logic                            out_ready,
  output logic [BW-1:0]                   out_blk,
  output logic [B-1:0][KAPPA-1:0][W-1:0]  out_data,
  output logic                            done
);
  logic        active, have;
  logic [31:0] nxt, nblocks;   // nxt: next block to read

  assign nblocks  = (num_vertices + 32'(B) - 1) / 32'(B);
  assign rd_re    = active && (nxt < nblocks) && (!have || out_ready);
  always_comb
    for (int j = 0; j < B; j++) rd_addr[j] = AW'(nxt * 32'(B) + 32'(j));
  assign out_valid = have;
  assign out_data  = rd_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; have <= 1'b0; nxt <= '0; out_blk <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !active) begin
        active <= 1'b1; have <= 1'b0; nxt <= '0;
      end else if (active) begin
        if (rd_re) begin
          nxt     <= nxt + 1;
          out_blk <= BW'(nxt);
          have    <= 1'b1;
        end else if (have && out_ready) begin
          have <= 1'b0;
        end
        if (!have && nxt >= nblocks) begin
          active <= 1'b0; done <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_blk));
endmodule
