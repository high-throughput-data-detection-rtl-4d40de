// ocd_proj: orthogonal projection onto the relaxed constellation set.
//
// MMSE mode (box_mode = 0): the set is the whole complex plane, so w passes
// unchanged. BOX mode (box_mode = 1): the set is the square [-R, R] x [-R, R]
// around a QAM constellation, so real and imaginary parts are clipped
// independently to [-R, +R]; R = radius is a run-time Q5.11 word (7/sqrt(42)
// for unit-power 64-QAM). With bpsk = 1 as well, the set is the real segment
// [-R, R]: the real part is clipped and the imaginary part set to zero.
// Purely combinational. clipped reports that a part was moved, for
// observation only.
module ocd_proj
  import ocd_pkg::*;
(
  input  logic  box_mode,
  input  logic  bpsk,
  input  word_t radius,
  input  cplx_t w,
  output cplx_t q,
  output logic  clipped
);
  function automatic word_t clip(input word_t v, input word_t r);
    if (v > r)       return r;
    else if (v < -r) return -r;
    else             return v;
  endfunction

  always_comb begin
    if (box_mode) begin
      q.re = clip(w.re, radius);
      q.im = bpsk ? '0 : clip(w.im, radius);
    end else begin
      q = w;
    end
    clipped = box_mode && (q != w);
  end

endmodule
