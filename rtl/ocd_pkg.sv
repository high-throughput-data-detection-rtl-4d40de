// ocd_pkg: types, constants and arithmetic helpers shared by the optimized
// coordinate descent (OCD) MU-MIMO-OFDM detector.
//
// All data words are 16-bit signed fixed point with 11 fractional bits
// (Q5.11), as used for most internal signals of the architecture; a complex
// value is a pair of such words (32 bits). Inner products use 36-bit real and
// imaginary accumulators (72 bits per complex sum). Products of two Q5.11
// words are Q10.22; they are brought back to Q5.11 by an arithmetic right
// shift by 11 (truncation) followed by saturation, which is this design's
// rounding choice.
package ocd_pkg;

  localparam int unsigned W     = 16;  // word width
  localparam int unsigned FRAC  = 11;  // fractional bits
  localparam int unsigned ACC_W = 36;  // inner-product adder width

  typedef logic signed [W-1:0] word_t;

  typedef struct packed {
    word_t re;
    word_t im;
  } cplx_t;

  typedef struct packed {
    logic signed [ACC_W-1:0] re;
    logic signed [ACC_W-1:0] im;
  } acc_t;

  localparam word_t WORD_MAX = word_t'(16'sh7FFF);
  localparam word_t WORD_MIN = word_t'(16'sh8000);

  // Saturate a wide signed value to one Q5.11 word.
  function automatic word_t sat_word(input logic signed [47:0] x);
    if (x > 48'sd32767)       return WORD_MAX;
    else if (x < -48'sd32768) return WORD_MIN;
    else                      return word_t'(x[W-1:0]);
  endfunction

  // Q5.11 x Q5.11 -> Q5.11 (truncate, saturate).
  function automatic word_t mul_word(input word_t a, input word_t b);
    logic signed [47:0] p;
    p = 48'(a) * 48'(b);
    return sat_word(p >>> FRAC);
  endfunction

  // Complex product a*b in Q5.11 (truncate, saturate per part).
  function automatic cplx_t cmul(input cplx_t a, input cplx_t b);
    logic signed [47:0] pr, pi;
    cplx_t r;
    pr = 48'(a.re) * 48'(b.re) - 48'(a.im) * 48'(b.im);
    pi = 48'(a.re) * 48'(b.im) + 48'(a.im) * 48'(b.re);
    r.re = sat_word(pr >>> FRAC);
    r.im = sat_word(pi >>> FRAC);
    return r;
  endfunction

  // Complex word times a real word (both Q5.11).
  function automatic cplx_t cscale(input cplx_t a, input word_t s);
    cplx_t r;
    r.re = mul_word(a.re, s);
    r.im = mul_word(a.im, s);
    return r;
  endfunction

  function automatic cplx_t cadd(input cplx_t a, input cplx_t b);
    cplx_t r;
    r.re = sat_word(48'(a.re) + 48'(b.re));
    r.im = sat_word(48'(a.im) + 48'(b.im));
    return r;
  endfunction

  function automatic cplx_t csub(input cplx_t a, input cplx_t b);
    cplx_t r;
    r.re = sat_word(48'(a.re) - 48'(b.re));
    r.im = sat_word(48'(a.im) - 48'(b.im));
    return r;
  endfunction

  // Operation token carried along the pipeline next to the data.
  localparam int unsigned SC_W   = 5;   // subcarrier slot index (S <= 32)
  localparam int unsigned USER_W = 5;   // user index (UMAX <= 32)

  typedef struct packed {
    logic              valid;
    logic              pre;     // 1: preprocessing, 0: equalization
    logic              last;    // last equalization iteration
    logic [SC_W-1:0]   sc;
    logic [USER_W-1:0] user;
  } tok_t;

endpackage
