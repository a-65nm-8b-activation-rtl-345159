// Shared constants and types of the single-ADC charge-domain CiM macro.
//
// Operands are 8b signed numbers held as 9 "digits" n in {-1,+1} (stored as
// 0/1 bits, 1 meaning +1):  x = sum_{i=1..7} n_i*2^(i-1) + (n0+ + n0-)/2.
// Digit index d: 0 = n0-, 1 = n0+, 2..8 = n1..n7.  Weighting every digit in
// half-LSB units gives the integer weights 1,1,2,4,...,128 (sum 256).  These
// are the relative capacitor weights of one CAAT leaf (over the 9 weight
// columns of a bank) and of the CAAT root (over the 9 activation digits).
// The digit format follows the paper; the digit order is this design's choice.
package cim_pkg;

  localparam int unsigned NDIG   = 9;     // digits per 8b operand
  localparam int unsigned NBANK  = 9;     // one bank per activation digit
  localparam int unsigned NCOL   = 9;     // one column per weight digit
  localparam int unsigned WSUM   = 256;   // sum of the digit weights
  localparam int unsigned ADC_BITS = 8;

  // Capacitor weight of digit d, in half-LSB units.
  function automatic int unsigned digit_weight(int unsigned d);
    return (d == 0) ? 1 : (1 << (d - 1));
  endfunction

  // Phases of one CiM cycle.  PH_STANDBY waits for start; the others are
  // the slices of the cycle: reset, coupling (S1), in-bank summation (S2),
  // in-array summation (S3), A/D conversion, idle tail.
  typedef enum logic [2:0] {
    PH_STANDBY = 3'd0,
    PH_RESET   = 3'd1,
    PH_COUPLE  = 3'd2,
    PH_LEAF    = 3'd3,
    PH_ROOT    = 3'd4,
    PH_ADC     = 3'd5,
    PH_IDLE    = 3'd6
  } phase_t;

endpackage
