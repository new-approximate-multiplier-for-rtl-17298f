// Shared types and the radix-4 Booth recoder of the Broken-Booth multiplier.
//
// The Broken-Booth multiplier is a signed modified-Booth (radix-4) multiplier in
// which every partial-product bit lying right of a Vertical Breaking Level (VBL)
// is replaced by zero. Two ways of breaking exist and are selected with
// bbm_type_e:
//   BBM_TYPE0  a negative row is first fully two's-complemented (inverted and
//              incremented), then broken. The error is then always <= 0.
//   BBM_TYPE1  a negative row is only inverted; the row is broken, and the
//              increment bit S (weight 4^j for row j) is added only if it lies
//              left of the VBL. This removes increments at the cost of accuracy.
// Both types and the VBL follow the paper; the encoding of the recoder outputs
// (one / two / neg) is the usual textbook one and is this design's choice.
package bbm_pkg;

  typedef enum logic {
    BBM_TYPE0 = 1'b0,
    BBM_TYPE1 = 1'b1
  } bbm_type_e;

  // Recoded radix-4 digit d in {-2,-1,0,+1,+2}: |d| is one-hot in {one, two},
  // or zero when both are clear; neg marks d < 0.
  typedef struct packed {
    logic neg;
    logic two;
    logic one;
  } booth_sel_t;

  // Recode the three overlapping multiplier bits {y[2j+1], y[2j], y[2j-1]}.
  // The code 3'b111 (digit -0) is recoded as a plain zero, so it never asks
  // for a complement.
  function automatic booth_sel_t booth_encode(input logic [2:0] b);
    booth_sel_t s;
    s.one = b[1] ^ b[0];
    s.two = (b == 3'b011) || (b == 3'b100);
    s.neg = b[2] && !(b[1] && b[0]);
    return s;
  endfunction

endpackage
