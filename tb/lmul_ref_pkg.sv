// lmul_ref_pkg: reference model of the L-Mul FP8 product for the testbenches.
//
// Works directly on integers from the defining equations, with no adders,
// carry chains or LUT cells, so that it is independent of the RTL structure:
//   pm   = x_m + y_m + 2^(MW - l(MW))                  (MW+2 bits)
//   c    = pm >> MW                                    (carry bits)
//   pe   = (x_e + y_e - bias + {0,1,1,2}[c]) mod 2^(EW+1)
//   mant = c == 2 ? {1, pm[MW-1:1]} : pm[MW-1:0]
//   zero = x[6:0] == 0 || y[6:0] == 0  -> pe = 0, mant = 0
//   result = {x[7]^y[7], pe, mant}, 9 bits.
// The offsets and biases are written out per format rather than computed.
package lmul_ref_pkg;

  // 2^-l(m) in mantissa LSBs for MW = 1..6 (l = 1,2,3,3,4,4)
  function automatic int ref_offset(input int mw);
    case (mw)
      1, 2, 3: return 1;
      4, 5:    return 2;
      default: return 4;
    endcase
  endfunction

  // exponent bias for EW = 6..1 (E6M1 .. E1M6)
  function automatic int ref_bias(input int ew);
    case (ew)
      6: return 31;
      5: return 15;
      4: return 7;
      3: return 3;
      2: return 1;
      default: return 0;
    endcase
  endfunction

  function automatic logic [8:0] lmul_ref(input int mw, input logic [7:0] x, input logic [7:0] y);
    int ew, xm, ym, xe, ye, pm, c, pe, mant, adj;
    logic zero;
    ew = 7 - mw;
    xm = int'(x[6:0]) % (1 << mw);
    ym = int'(y[6:0]) % (1 << mw);
    xe = int'(x[6:0]) >> mw;
    ye = int'(y[6:0]) >> mw;
    pm = xm + ym + ref_offset(mw);
    c  = pm >> mw;
    adj = (c == 0) ? 0 : (c == 3) ? 2 : 1;
    pe = (xe + ye - ref_bias(ew) + adj) & ((1 << (ew + 1)) - 1);
    if (c == 2) mant = (1 << (mw - 1)) | ((pm % (1 << mw)) >> 1);
    else        mant = pm % (1 << mw);
    zero = (x[6:0] == 0) || (y[6:0] == 0);
    if (zero) begin
      pe   = 0;
      mant = 0;
    end
    return 9'((((x[7] ^ y[7]) ? 1 : 0) << 8) | (pe << mw) | mant);
  endfunction

  // carry bits of the mantissa sum, for counting which case a pair exercises
  function automatic int ref_carry(input int mw, input logic [7:0] x, input logic [7:0] y);
    return ((int'(x[6:0]) % (1 << mw)) + (int'(y[6:0]) % (1 << mw)) + ref_offset(mw)) >> mw;
  endfunction

endpackage
