// ppr_controller: sequences one Personalized PageRank operation over the
// data-flow units:
//   INIT                       P1 = V_bar, P2 = 0      (update_unit, init mode)
//   repeat max_iter times:
//     SCALE                    scaling_vec from P1 and the dangling bitmap
//     SPMV                     P2 = X * P1             (reader .. store FSM)
//     UPDATE                   P1 = alpha*P2 + scaling_vec + (1-alpha)*V_bar
//   WRITE                      stream P1 out
// Each phase is started with a one-cycle pulse on its start output and ends
// when its unit pulses done; then the next phase starts. An SpMV phase with no
// edge packets is skipped. done pulses when the write-back has finished;
// iter counts completed iterations. The order of phases is the paper's
// algorithm; running them strictly one after another is this design's choice.
module ppr_controller
  import ppr_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] max_iter,
  input  logic [31:0] num_packets,
  output phase_e      phase,
  output logic [31:0] iter,
  output logic        busy,
  output logic        done,
  // unit control
  output logic        init_start,
  output logic        scale_start,
  output logic        spmv_start,
  output logic        update_start,
  output logic        write_start,
  input  logic        update_done,   // also ends INIT
  input  logic        scale_done,
  input  logic        spmv_done,
  input  logic        write_done
);
  logic kick;    // first cycle of a phase

  assign busy         = (phase != PH_IDLE);
  assign init_start   = kick && phase == PH_INIT;
  assign scale_start  = kick && phase == PH_SCALE;
  assign spmv_start   = kick && phase == PH_SPMV;
  assign update_start = kick && phase == PH_UPDATE;
  assign write_start  = kick && phase == PH_WRITE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE; iter <= '0; kick <= 1'b0; done <= 1'b0;
    end else begin
      kick <= 1'b0;
      done <= 1'b0;
      unique case (phase)
        PH_IDLE: if (start) begin
          phase <= PH_INIT; iter <= '0; kick <= 1'b1;
        end
        PH_INIT: if (update_done) begin
          phase <= (max_iter == 0) ? PH_WRITE : PH_SCALE; kick <= 1'b1;
        end
        PH_SCALE: if (scale_done) begin
          phase <= (num_packets == 0) ? PH_UPDATE : PH_SPMV; kick <= 1'b1;
        end
        PH_SPMV: if (spmv_done) begin
          phase <= PH_UPDATE; kick <= 1'b1;
        end
        PH_UPDATE: if (update_done) begin
          iter  <= iter + 1;
          phase <= (iter + 1 == max_iter) ? PH_WRITE : PH_SCALE;
          kick  <= 1'b1;
        end
        PH_WRITE: if (write_done) begin
          phase <= PH_IDLE; done <= 1'b1;
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end
endmodule
