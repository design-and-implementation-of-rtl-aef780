// Shared types and constants of the polar-code blind detector.
//
// The default sizes are those of the synthesized configuration: codes up to
// N_MAX = 512 bits, list size L_MAX = 8 in the second decoding phase and
// L1 = 2 in the first, P = 64 processing elements per path, C1 = 44
// candidates of which C2 = 5 reach the second phase, a 16-bit UE ID.
// Fixed-point widths (6-bit channel LLRs, 8-bit internal LLRs, 12-bit path
// metrics) are a choice of this implementation; no widths are specified for
// the original design.
package bd_pkg;

  localparam int unsigned N_MAX_D     = 512;
  localparam int unsigned L_MAX_D     = 8;
  localparam int unsigned L1_D        = 2;
  localparam int unsigned P_D         = 64;
  localparam int unsigned C1_D        = 44;
  localparam int unsigned C2_D        = 5;
  localparam int unsigned N_SCL_MAX_D = 1;
  localparam int unsigned ID_BITS_D   = 16;
  localparam int unsigned NUM_CODES_D = 2;
  localparam int unsigned Q_D         = 6;   // channel LLR width
  localparam int unsigned W_D         = 8;   // internal LLR width
  localparam int unsigned PM_W_D      = 12;  // path metric width

  // Role of a leaf (bit-channel) of the polar code.
  typedef enum logic [1:0] {
    BT_FROZEN = 2'd0,
    BT_INFO   = 2'd1,
    BT_ID     = 2'd2
  } bit_type_t;

  // List-size selection of a decoder run.
  typedef enum logic {
    LM_L1   = 1'b0,   // first phase: L1 paths per candidate, L_MAX/L1 candidates
    LM_LMAX = 1'b1    // second phase: L_MAX paths, one candidate
  } list_mode_t;

endpackage
