// dr_pkg: dual-rail (1-of-2) data type shared by every block of the adder.
//
// A logical bit W is carried on two wires (W1, W0). W = 1 is sent as
// W1 = 1, W0 = 0 and W = 0 as W1 = 0, W0 = 1. Both wires at 0 is the
// spacer, the empty state that separates two data words in the 4-phase
// return-to-zero protocol; both wires at 1 is illegal. This encoding is the
// one the adder is designed for. The struct layout (rail 1 in the upper bit)
// and the helper functions are this implementation's own.
package dr_pkg;

  typedef struct packed {
    logic r1;  // "one" rail  (W1)
    logic r0;  // "zero" rail (W0)
  } dr_t;

  localparam dr_t DR_SPACER = '{r1: 1'b0, r0: 1'b0};

  // Encode a binary value as a valid dual-rail code word.
  function automatic dr_t dr_enc(input logic v);
    dr_t x;
    x.r1 = v;
    x.r0 = ~v;
    return x;
  endfunction

  // Exactly one rail high.
  function automatic logic dr_is_valid(input dr_t x);
    return x.r1 ^ x.r0;
  endfunction

  // Both rails low.
  function automatic logic dr_is_spacer(input dr_t x);
    return ~(x.r1 | x.r0);
  endfunction

  // Both rails high: never allowed.
  function automatic logic dr_is_illegal(input dr_t x);
    return x.r1 & x.r0;
  endfunction

  // Value of a code word: 1 only for a valid one (rail 1 high, rail 0 low).
  function automatic logic dr_dec(input dr_t x);
    return x.r1 & ~x.r0;
  endfunction

endpackage
