// ocd_rshift: dynamic-range reduction after the inner-product unit, shared by
// preprocessing and equalization. Both ||h_u||^2 and h_u^H r are close to B,
// so the sum is shifted right by b = ceil(log2 B) bits. The matching scale of
// d_u^-1 (computed from the shifted norm) cancels the shift in the z update.
//
// Outputs, registered one cycle after the input:
//   shifted - the 72-bit sum >>> b (Q.22, arithmetic shift)
//   word    - the same value as a Q5.11 complex word: a further >>> 11 and
//             saturation to 16 bits per part (this design's choice of
//             truncation and saturation).
module ocd_rshift
  import ocd_pkg::*;
#(
  parameter int unsigned B = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  acc_t  sum,
  output logic  out_valid,
  output acc_t  shifted,
  output cplx_t word
);
  localparam int unsigned SH = (B > 1) ? $clog2(B) : 0;

  acc_t s;
  assign s.re = sum.re >>> SH;
  assign s.im = sum.im >>> SH;

  always_ff @(posedge clk) begin
    shifted <= s;
    word.re <= sat_word(48'(s.re >>> FRAC));
    word.im <= sat_word(48'(s.im >>> FRAC));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
