// ocd_zupdate: symbol-estimate update of one user (line 12 of the OCD
// algorithm, upper half of the equalization datapath):
//     z_new = proj( d_u^-1 * (h_u^H r >> b)  +  p_u * z_old )
// Stage 1 registers the two complex-by-real products (Q5.11, truncated and
// saturated); stage 2 registers their saturated sum after the projection.
// Latency 2 cycles, one update per cycle. The operation order and widths
// (16-bit d_u^-1 and p_u, 32-bit complex words) are the paper's; the two-stage
// split is this design's. box_mode and bpsk select the projection (see
// ocd_proj); they act in stage 2 and must be held steady during a batch.
module ocd_zupdate
  import ocd_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t hr,        // (h_u^H r) >> b as Q5.11
  input  word_t d_inv,
  input  word_t p,
  input  cplx_t z_old,
  input  logic  box_mode,
  input  logic  bpsk,
  input  word_t radius,
  output logic  out_valid,
  output cplx_t z_new,
  output logic  clipped
);
  cplx_t s1_a, s1_b;
  logic  s1_v;
  always_ff @(posedge clk) begin
    s1_a <= cscale(hr, d_inv);
    s1_b <= cscale(z_old, p);
  end

  cplx_t q;
  logic  q_clip;
  ocd_proj u_proj (
    .box_mode,
    .bpsk,
    .radius,
    .w       (cadd(s1_a, s1_b)),
    .q       (q),
    .clipped (q_clip)
  );

  always_ff @(posedge clk) begin
    z_new   <= q;
    clipped <= q_clip & s1_v;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_v      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      s1_v      <= in_valid;
      out_valid <= s1_v;
    end
  end

endmodule
