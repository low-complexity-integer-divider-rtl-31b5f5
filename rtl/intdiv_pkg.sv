// Shared types of the integer divider for moduli q = 2^W - 2^u +/- 1.
//
// qsign_e encodes the control signal s that picks the sign of the last term
// of q (s = 1: q = 2^W - 2^u + 1, s = 0: q = 2^W - 2^u - 1); this encoding is
// the one the architecture uses for its mux select.
// corr_e names the three outcomes of the final correction step, which moves
// the estimate b* by -1, 0 or +1 to give floor(lambda / q).
package intdiv_pkg;

  typedef enum logic {
    QSIGN_MINUS1 = 1'b0,   // q = 2^W - 2^u - 1
    QSIGN_PLUS1  = 1'b1    // q = 2^W - 2^u + 1
  } qsign_e;

  typedef enum logic [1:0] {
    CORR_DEC  = 2'd0,      // lambda - b*q < 0       -> b = b* - 1
    CORR_KEEP = 2'd1,      // 0 <= lambda - b*q < q  -> b = b*
    CORR_INC  = 2'd2       // lambda - b*q >= q      -> b = b* + 1
  } corr_e;

endpackage
