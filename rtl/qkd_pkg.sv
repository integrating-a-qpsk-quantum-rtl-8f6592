// qkd_pkg: types and constants shared by the QPSK QKD MODEM blocks.
//
// BB84 in a QPSK format: every optical pulse slot carries one BB84 symbol
// chosen by Alice as a (base, bit) pair and measured by Bob in one base.
// The phase values follow the link description: Alice sends pi/4 or -pi/4
// for bit 0 in base 1 or base 2, and -3pi/4 or 3pi/4 for bit 1 in base 1 or
// base 2; Bob applies pi/4 (base 1) or -pi/4 (base 2).  Phases are kept here
// as 3-bit integers in units of pi/4, modulo 8, so that a phase difference
// of 0 is 0 and a difference of pi is 4.
//
// The slot record is this design's own format: slot number, base, key bit
// and the two detector click flags (zero on Alice's side).
package qkd_pkg;

  // Width of the slot counter that numbers pulse slots since reset.
  localparam int unsigned SLOT_W = 32;

  // Base encoding: the random base bit 0 selects base 1, 1 selects base 2.
  typedef enum logic {
    BASE1 = 1'b0,
    BASE2 = 1'b1
  } base_e;

  // Record written to the burst buffer once per slot (Alice) or once per
  // slot with at least one detector click (Bob).
  typedef struct packed {
    logic [SLOT_W-1:0] slot;     // slot number since reset
    base_e             base;     // base used by this side
    logic              key_bit;  // Alice: sent bit; Bob: detected bit
    logic [1:0]        clicks;   // Bob: {detector 2, detector 1}; Alice: 0
  } qkd_rec_t;

  localparam int unsigned REC_W = $bits(qkd_rec_t);

  // Phase in units of pi/4, modulo 8.
  typedef logic [2:0] phase_t;

  // Alice's QPSK phase for a (base, bit) pair.
  function automatic phase_t alice_phase(base_e base, logic key_bit);
    case ({key_bit, base})
      {1'b0, BASE1}: return 3'd1;  //  pi/4
      {1'b0, BASE2}: return 3'd7;  // -pi/4
      {1'b1, BASE1}: return 3'd5;  // -3pi/4
      default:       return 3'd3;  //  3pi/4
    endcase
  endfunction

  // Bob's phase for a base.
  function automatic phase_t bob_phase(base_e base);
    return (base == BASE1) ? 3'd1 : 3'd7;
  endfunction

endpackage
