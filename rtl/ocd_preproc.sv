// ocd_preproc: preprocessing datapath after the shared inner-product and
// shift units (lines 6-8 of the OCD algorithm).
//
// From the shifted squared column norm it takes the real part g (16 bits),
// adds the regularisation alpha (N0 for MMSE, 0 for BOX equalization, given
// in the same 2^-b scale as g), takes the reciprocal d_u^-1 = 1/(g + alpha)
// and forms the regularised gain p_u = d_u^-1 * g. Because g is the norm
// shifted right by b bits, d_u^-1 comes out 2^b times too large, which
// exactly undoes the same shift applied to h_u^H r during equalization.
//
// Timing: registered adder (1), reciprocal unit (3), multiplier (1): the
// outputs follow in_valid by 5 cycles. The structure re(.), +, 1/x, x is the
// paper's; the latency split is this design's.
module ocd_preproc
  import ocd_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t g,
  input  word_t alpha,
  output logic  out_valid,
  output word_t d_inv,
  output word_t p
);
  word_t s1_sum, s1_g;
  logic  s1_v;
  always_ff @(posedge clk) begin
    s1_sum <= sat_word(48'(g) + 48'(alpha));
    s1_g   <= g;
  end
  always_ff @(posedge clk) begin
    if (!rst_n) s1_v <= 1'b0;
    else        s1_v <= in_valid;
  end

  logic  rc_v;
  word_t rc_y;
  ocd_reciprocal u_recip (
    .clk, .rst_n,
    .in_valid (s1_v),
    .x        (s1_sum),
    .out_valid(rc_v),
    .y        (rc_y)
  );

  // g travels alongside the 3-cycle reciprocal.
  word_t g_d [3];
  always_ff @(posedge clk) begin
    g_d[0] <= s1_g;
    g_d[1] <= g_d[0];
    g_d[2] <= g_d[1];
  end

  always_ff @(posedge clk) begin
    d_inv <= rc_y;
    p     <= mul_word(rc_y, g_d[2]);
  end
  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= rc_v;
  end

endmodule
