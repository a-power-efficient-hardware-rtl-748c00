// lmul_pkg: constants shared by the L-Mul FP8 multiplier.
//
// An FP8 word is {sign, exponent[EW-1:0], mantissa[MW-1:0]} with EW + MW = 7.
// The multiplier approximates (1+mx)(1+my) by 1 + mx + my + 2^-l(MW), so the
// mantissa product is replaced by a constant offset. The functions below give
// the numbers that the datapath hard-wires for one format:
//   bias(EW)            = 2^(EW-1) - 1                        (IEEE-754 style bias)
//   l_of_m(MW)          = MW for MW <= 3, 3 for MW = 4, 4 for MW > 4
//   lmul_offset(MW)     = 2^(MW - l(MW)), the term 2^-l(MW) in units of one
//                         mantissa LSB (the "2km" operand of the mantissa adder)
//   bias_star(EW,carry) = -bias + 0, +1 or +2: the exponent bias folded together
//                         with the renormalisation step chosen by the two carry
//                         bits P_m[MW+1:MW] (00 -> +0, 11 -> +2, others -> +1).
// The bias and the bias* table follow the paper's equations and its bias* table.
// The offset follows the paper's L-Mul equation (2^-l(m)); the paper's
// bit-level restatement writes 2^l(m) over 2^m, which would add a whole unit
// for E4M3, so the first form is used. For MW = 4 the paper's l(m) gives two
// cases (3 and 4); the one listed for "m = 4" (3) is used.
package lmul_pkg;

  typedef enum logic [1:0] {
    CARRY_00 = 2'b00,   // 1.x   : no renormalisation
    CARRY_01 = 2'b01,   // 10.x  : exponent + 1
    CARRY_10 = 2'b10,   // 11.x  : exponent + 1, mantissa shifted right
    CARRY_11 = 2'b11    // 100.x : exponent + 2
  } mant_carry_e;

  function automatic int bias(input int ew);
    return (1 << (ew - 1)) - 1;
  endfunction

  function automatic int l_of_m(input int mw);
    if (mw <= 3)      return mw;
    else if (mw == 4) return 3;
    else              return 4;
  endfunction

  function automatic int lmul_offset(input int mw);
    return 1 << (mw - l_of_m(mw));
  endfunction

  function automatic int bias_star(input int ew, input logic [1:0] carry);
    case (carry)
      2'b00:   return -bias(ew);
      2'b11:   return -bias(ew) + 2;
      default: return -bias(ew) + 1;
    endcase
  endfunction

endpackage
