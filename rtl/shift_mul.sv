// shift_mul: multiply a signed activation by a power-of-two weight code.
//
// This is the shift-add quantization element of the accelerator: a weight is
// (-1)^s * 2^-e (e = 0..6) or zero (e = 7), so the product needs no multiplier.
// The result is returned exactly, scaled by 2^EMAX:
//   prod = (-1)^s * act * 2^(EMAX - e),   prod = 0 for e = 7.
// The shift by a weight that is a synthesis constant reduces to wiring; only
// the optional negation costs logic, and it folds into the adder tree behind.
// Purely combinational. Shift-add weights follow the paper; the code format,
// the exponent range and EMAX are this design's own choices.
module shift_mul
  import dscnn_pkg::*;
(
  input  act_t   act,
  input  wcode_t code,
  output prod_t  prod
);

  logic [2:0] e;
  logic [2:0] sh;
  prod_t      mag;

  assign e  = code[2:0];
  assign sh = 3'(EMAX) - e;  // only used for e <= EMAX

  always_comb begin
    mag = prod_t'(act) <<< sh;
    if (e == 3'd7)    prod = '0;
    else if (code[3]) prod = -mag;
    else              prod = mag;
  end

endmodule
