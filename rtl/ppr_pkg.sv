// ppr_pkg: constants and types shared by the PPR accelerator.
// The defaults are the configuration the design is built around: 256-bit
// DRAM packets carrying B = 8 edges (32-bit slots), kappa = 8 personalization
// vertices computed together, and PPR values in unsigned Q1.25 (26 bits) with
// truncating quantization. MAX_V (the on-chip buffer capacity in vertices) is
// set to 200000, the largest graph the design is evaluated with; it is a
// synthesis-time choice, not a fixed property of the architecture.
package ppr_pkg;
  localparam int unsigned P_SIZE   = 256;               // DRAM packet width
  localparam int unsigned SLOT     = 32;                // bits per value in DRAM
  localparam int unsigned B        = P_SIZE / SLOT;     // edges per packet/cycle
  localparam int unsigned KAPPA    = 8;                 // parallel PPR vectors
  localparam int unsigned W        = 26;                // fixed-point width
  localparam int unsigned FRAC     = 25;                // fraction bits (Q1.25)
  localparam int unsigned MAX_V    = 200000;            // buffer capacity

  // Phases of one PPR operation (see ppr_controller).
  typedef enum logic [2:0] {
    PH_IDLE   = 3'd0,
    PH_INIT   = 3'd1,   // P1 = V_bar, P2 = 0
    PH_SCALE  = 3'd2,   // scaling_vec = alpha/|V| * (P1 . d_bar)
    PH_SPMV   = 3'd3,   // P2 = X * P1
    PH_UPDATE = 3'd4,   // P1 = alpha*P2 + scaling_vec + (1-alpha)*V_bar, P2 = 0
    PH_WRITE  = 3'd5    // stream P1 out
  } phase_e;
endpackage
