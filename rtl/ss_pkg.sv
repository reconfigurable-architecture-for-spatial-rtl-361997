// ss_pkg: shared number format and types for the spatial sensing datapath.
//
// Every datapath value is a signed fixed-point number of WL bits, IWL of them
// integer bits (sign included) and FRAC = WL - IWL fractional bits.  The default
// {24,8} is one of the three word lengths evaluated for this architecture (the
// others being {17,7} and single-precision float); it is the middle point of the
// accuracy/resource trade-off.  A complex sample packs the real part above the
// imaginary part.  Products are truncated back to FRAC fractional bits by an
// arithmetic right shift (round toward minus infinity) and results that leave
// the WL-bit range saturate; both are choices of this design.  WL and IWL
// may be changed here (WL up to 24, e.g. {17,7}); no module needs editing.
package ss_pkg;

  localparam int WL    = 24;          // total word length
  localparam int IWL   = 8;           // integer bits, sign included
  localparam int FRAC  = WL - IWL;    // fractional bits
  localparam int ACC_W = WL + 24;     // accumulator width (same FRAC, more integer bits)
  localparam int N_ANGLES = 181;      // DoA grid: 0..180 degrees in 1 degree steps
  localparam int ANG_W    = 8;        // bits of an angle index

  typedef logic signed [WL-1:0]    fx_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  typedef struct packed {
    fx_t re;
    fx_t im;
  } cplx_t;

  typedef struct packed {
    acc_t re;
    acc_t im;
  } cacc_t;

  // Saturate an accumulator value into the WL-bit datapath format.
  function automatic fx_t sat_fx(input acc_t v);
    acc_t hi, lo;
    hi = acc_t'({1'b0, {(WL-1){1'b1}}});
    lo = -hi - 1;
    if (v > hi)      return fx_t'(hi);
    else if (v < lo) return fx_t'(lo);
    else             return fx_t'(v);
  endfunction

  // Product of two datapath values, rescaled to FRAC fractional bits.
  // The product is formed at MUL_W bits, enough for the full 2*WL-bit
  // product and for the accumulator, so any WL up to 24 needs no other change.
  localparam int MUL_W = (2*WL > ACC_W) ? 2*WL : ACC_W;
  typedef logic signed [MUL_W-1:0] mul_t;

  function automatic acc_t fx_mul(input fx_t a, input fx_t b);
    mul_t p;
    p = mul_t'(a) * mul_t'(b);
    return acc_t'(p >>> FRAC);
  endfunction

endpackage
