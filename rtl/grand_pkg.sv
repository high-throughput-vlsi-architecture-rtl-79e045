// grand_pkg: types and default sizes shared by the GRANDAB (AB=3) decoder.
//
// The decoder tests every error pattern of Hamming weight 0..3 against a
// linear code of length N whose parity-check matrix H is loaded at run time.
// Defaults follow the paper's main configuration: code length 128 and a
// syndrome of at most 32 bits (code rate 0.75 or higher). The dial operation
// codes and the phase encoding are this design's own choice.
package grand_pkg;

  // Paper's main configuration.
  localparam int unsigned N_DEFAULT  = 128; // code length n
  localparam int unsigned SW_DEFAULT = 32;  // syndrome width, max n-k
  localparam int unsigned AB_DEFAULT = 3;   // abandonment weight

  // Operation applied to a dial (and its index dial) at the end of a time step.
  typedef enum logic [2:0] {
    DIAL_HOLD     = 3'd0, // keep content
    DIAL_CLEAR    = 3'd1, // all rows hold the null vector, all N rows active
    DIAL_LOAD     = 3'd2, // reset to s_1..s_n, shifted up by ld_shift, then
                          // cyclically shifted by ld_rot (0 or 1)
    DIAL_ROT      = 3'd3, // cyclic shift by one among the active rows
    DIAL_SHIFT_UP = 3'd4  // cyclic shift by one, row leaving the top is
                          // replaced by the null vector; one fewer active row
  } dial_op_e;

  // Decoding step being executed: weight of the patterns under test.
  typedef enum logic [2:0] {
    PH_IDLE = 3'd0,
    PH_W0   = 3'd1, // syndrome of r (no flip)
    PH_W1   = 3'd2, // one-bit flips
    PH_W2   = 3'd3, // two-bit flips
    PH_W3   = 3'd4  // three-bit flips
  } phase_e;

  // Control word for one dial / index-dial pair.
  typedef struct packed {
    dial_op_e   op;
    logic [7:0] ld_shift; // wide enough for N up to 256
    logic       ld_rot;
  } dial_ctrl_t;

endpackage
