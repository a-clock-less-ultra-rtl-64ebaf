// Shared types and helpers of the bit-serial LEDR / LVDS link.
//
// The link moves one address-event word over two wires, Data and Parity,
// using Level-Encoded Dual-Rail (LEDR) signalling: Data always carries the
// bit value, Parity carries either the inverted bit (odd bit positions) or
// the bit itself (even bit positions). A receiver can therefore tell one bit
// from the next without a clock, because every new bit flips the relation
// P == D / P != D. Bits are sent MSB first and the MSB position is "odd"
// (P = ~D), so for an even word width the last bit (LSB) is "even" (P = D)
// and the idle link always rests with P == D.
//
// Inside the transmitter and receiver the word is kept as a four-phase
// dual-rail code (a .t and a .f rail per bit, both low = empty/null), as the
// token-cells of the paper do.
package lvds_link_pkg;

  // Address-event word width (the measured link carries 32-bit events).
  localparam int unsigned EVENT_W = 32;

  // One LVDS pair seen as two digital levels. Both low means the common-mode
  // voltage is pulled to ground: the pair is asleep and the receiver is off.
  typedef struct packed {
    logic t;  // LVDS.t
    logic f;  // LVDS.f
  } lvds_pair_t;

  // One dual-rail bit (four-phase, return-to-zero). {0,0} is null.
  typedef struct packed {
    logic t;
    logic f;
  } dr_bit_t;

  // Token-cell flavour: odd cells send/accept P = ~D, even cells P = D.
  typedef enum logic {
    CELL_EVEN = 1'b0,
    CELL_ODD  = 1'b1
  } cell_kind_e;

  // Kind of the cell that carries word bit i of an n-bit word. Bit n-1 (the
  // first one sent) is odd and the kinds alternate from there.
  function automatic cell_kind_e cell_kind(input int unsigned i, input int unsigned n);
    return ((n - 1 - i) % 2 == 0) ? CELL_ODD : CELL_EVEN;
  endfunction

  // LEDR parity rail for bit value b sent by a cell of kind k.
  function automatic logic ledr_parity(input logic b, input cell_kind_e k);
    return (k == CELL_ODD) ? ~b : b;
  endfunction

endpackage
