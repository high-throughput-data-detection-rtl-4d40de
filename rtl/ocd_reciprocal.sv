// ocd_reciprocal: y = 1/x for a positive Q5.11 word, used in preprocessing
// to form d_u^-1 = 1/(||h_u||^2 + alpha).
//
// Three register stages:
//   1. normalise - a leading-zero detector finds the leading one at bit e and
//      x is shifted left so the leading one lands in bit 15, i.e. the
//      normalised mantissa m lies in [0.5, 1);
//   2. lookup    - the 11 bits below the leading one address a 2048-entry,
//      18-bit table of normalised reciprocals (U2.16 values in (1, 2]);
//   3. denormalise - since x = m * 2^(e-10), 1/x in Q5.11 is the table value
//      times 2^(5-e): a right shift with rounding for e >= 5, a left shift
//      with saturation otherwise.
// The normalise / LUT / denormalise structure and the 2048 x 18 table follow
// the paper. Entry i holds round(2^28 / (2048 + i + 0.5)), the reciprocal of
// the midpoint of its interval; the paper does not print the table, so it
// is computed here by a constant function. x <= 0 returns the largest word.
module ocd_reciprocal
  import ocd_pkg::*;
#(
  parameter int unsigned LUT_DEPTH = 2048,
  parameter int unsigned LUT_W     = 18
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t x,
  output logic  out_valid,
  output word_t y
);
  localparam int unsigned IDX_W = $clog2(LUT_DEPTH);   // 11

  typedef logic [LUT_W-1:0] lut_t [LUT_DEPTH];

  function automatic lut_t gen_lut();
    lut_t t;
    longint unsigned num, den;
    for (int i = 0; i < LUT_DEPTH; i++) begin
      // round(2^(IDX_W+17) / (2^IDX_W + i + 0.5)) = floor((2^(IDX_W+19)/(2^(IDX_W+1)+2i+1) + 1) / 2)
      num  = 64'd1 << (IDX_W + 19);
      den  = (64'd1 << (IDX_W + 1)) + 64'(2 * i + 1);
      t[i] = LUT_W'(((num / den) + 64'd1) >> 1);
    end
    return t;
  endfunction

  localparam lut_t LUT = gen_lut();

  // Stage 1: normalise.
  logic [3:0]       lz_e;
  logic [W-1:0]     norm;
  logic             is_bad;
  always_comb begin
    lz_e = '0;
    for (int k = 0; k < W - 1; k++)
      if (x[k]) lz_e = 4'(k);
    norm   = (W)'(x) << (W - 1 - 32'(lz_e));
    is_bad = (x <= 0);
  end

  logic [IDX_W-1:0] s1_idx;
  logic [3:0]       s1_e;
  logic             s1_bad;
  always_ff @(posedge clk) begin
    s1_idx <= norm[W-2 -: IDX_W];
    s1_e   <= lz_e;
    s1_bad <= is_bad;
  end

  // Stage 2: table lookup.
  logic [LUT_W-1:0] s2_r;
  logic [3:0]       s2_e;
  logic             s2_bad;
  always_ff @(posedge clk) begin
    s2_r   <= LUT[s1_idx];
    s2_e   <= s1_e;
    s2_bad <= s1_bad;
  end

  // Stage 3: denormalise by 2^(5-e).
  logic [47:0] den_v;
  always_comb begin
    if (s2_e >= 4'd5) begin
      if (s2_e == 4'd5) den_v = 48'(s2_r);
      else              den_v = (48'(s2_r) + (48'd1 << (s2_e - 4'd6))) >> (s2_e - 4'd5);
    end else begin
      den_v = 48'(s2_r) << (4'd5 - s2_e);
    end
  end

  always_ff @(posedge clk) begin
    if (s2_bad || den_v > 48'd32767) y <= WORD_MAX;
    else                             y <= word_t'(den_v[W-1:0]);
  end

  logic [2:0] vld;
  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[1:0], in_valid};
  end
  assign out_valid = vld[2];

endmodule
