// tb_fp_ref_pkg: reference model of the floating point product, for testbenches.
//
// ref_mul() multiplies two IEEE 754 numbers of any of the three formats
// (exponent width ew, fraction width fw, right-aligned in 128 bits) with the
// same conventions as the design: subnormal inputs read as zero, results
// below the normal range flushed to a signed zero with underflow, results at
// or above the largest exponent turned into a signed infinity with overflow,
// quiet NaN 0/all-ones/100..0 for NaN operands and infinity times zero.
// It is written independently of the RTL: it forms the exact significand
// product in 256-bit arithmetic, finds its leading one with a loop, divides
// by a power of two and rounds to nearest-even by comparing the remainder
// with one half, instead of using guard and sticky bits.
//
// The package also has operand generators shared by the testbenches.
package tb_fp_ref_pkg;

  typedef logic [255:0] wide_t;

  // Flags in the order of civp_pkg::fp_flags_t: {invalid, overflow, underflow}.
  function automatic logic [127:0] ref_mul(input logic [127:0] a, input logic [127:0] b,
                                           input int ew, input int fw,
                                           output logic [2:0] flg);
    wide_t one = 256'd1;
    wide_t fmask = (one << fw) - 1;
    int    emax = (1 << ew) - 1;
    int    bias = (1 << (ew - 1)) - 1;
    wide_t fa = wide_t'(a) & fmask;
    wide_t fb = wide_t'(b) & fmask;
    int    ea = int'((wide_t'(a) >> fw) & wide_t'(emax));
    int    eb = int'((wide_t'(b) >> fw) & wide_t'(emax));
    logic  s  = a[ew + fw] ^ b[ew + fw];
    logic  a_nan = (ea == emax) && (fa != 0);
    logic  b_nan = (eb == emax) && (fb != 0);
    logic  a_inf = (ea == emax) && (fa == 0);
    logic  b_inf = (eb == emax) && (fb == 0);
    logic  a_zero = (ea == 0);
    logic  b_zero = (eb == 0);
    wide_t prod, q, rem, half, res;
    int    lead, sh, e;

    flg = 3'b000;
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      flg[2] = (a_nan && !fa[fw-1]) || (b_nan && !fb[fw-1]) ||
               (a_inf && b_zero) || (b_inf && a_zero);
      res = (wide_t'(emax) << fw) | (one << (fw - 1));
      return 128'(res);
    end
    if (a_inf || b_inf)
      return 128'((wide_t'(s) << (ew + fw)) | (wide_t'(emax) << fw));
    if (a_zero || b_zero)
      return 128'(wide_t'(s) << (ew + fw));

    prod = ((one << fw) | fa) * ((one << fw) | fb);
    lead = 0;
    for (int i = 0; i < 256; i++) if (prod[i]) lead = i;
    sh   = lead - fw;                    // bits to drop
    q    = prod >> sh;
    rem  = prod - (q << sh);
    half = one << (sh - 1);
    if (rem > half || (rem == half && q[0])) q = q + 1;
    if (q == (one << (fw + 1))) begin    // rounding carried into a new bit
      q  = q >> 1;
      sh = sh + 1;
    end
    e = ea + eb - bias + (sh - fw);
    if (e >= emax) begin
      flg[1] = 1'b1;
      return 128'((wide_t'(s) << (ew + fw)) | (wide_t'(emax) << fw));
    end
    if (e <= 0) begin
      flg[0] = 1'b1;
      return 128'(wide_t'(s) << (ew + fw));
    end
    res = (wide_t'(s) << (ew + fw)) | (wide_t'(e) << fw) | (q & fmask);
    return 128'(res);
  endfunction

  function automatic logic [127:0] rand128();
    return {$urandom(), $urandom(), $urandom(), $urandom()};
  endfunction

  // A random operand. kind 0: exponent near the bias (normal products);
  // kind 1: any exponent (overflow, underflow, zero, infinity, NaN all
  // possible); kind 2: sparse fraction with few set bits (exact and tie
  // products); kind 3: a special value.
  function automatic logic [127:0] rand_operand(input int ew, input int fw, input int kind);
    wide_t one  = 256'd1;
    int    emax = (1 << ew) - 1;
    int    bias = (1 << (ew - 1)) - 1;
    wide_t f    = wide_t'(rand128()) & ((one << fw) - 1);
    int    e;
    logic  s    = 1'($urandom());
    case (kind)
      0: e = bias - 20 + int'($urandom_range(0, 40));
      1: e = int'($urandom_range(0, emax));
      2: begin
           e = bias - 4 + int'($urandom_range(0, 8));
           f = (wide_t'($urandom_range(0, 7)) << (fw - 3)) | (wide_t'($urandom_range(0, 1)) << int'($urandom_range(0, fw - 1)));
         end
      default: begin
           case ($urandom_range(0, 4))
             0: begin e = 0;    f = 0; end                      // zero
             1: begin e = 0;    f = f | 1; end                  // subnormal
             2: begin e = emax; f = 0; end                      // infinity
             3: begin e = emax; f = f | (one << (fw - 1)); end  // quiet NaN
             default: begin e = emax; f = (f & ((one << (fw - 1)) - 1)) | 1; end  // signalling NaN
           endcase
         end
    endcase
    return 128'((wide_t'(s) << (ew + fw)) | (wide_t'(e) << fw) | f);
  endfunction

endpackage
