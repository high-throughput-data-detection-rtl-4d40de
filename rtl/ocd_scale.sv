// ocd_scale: the h_u * Delta z_u scaling unit (lines 13-14 of the OCD
// algorithm, lower half of the equalization datapath).
// Stage 1 registers Delta z = z_new - z_old (saturated Q5.11) together with
// h_u; stage 2 registers the B complex products h_i * Delta z (Q5.11,
// truncated and saturated). Latency 2 cycles, one vector per cycle.
module ocd_scale
  import ocd_pkg::*;
#(
  parameter int unsigned B = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t z_new,
  input  cplx_t z_old,
  input  cplx_t h [B],
  output logic  out_valid,
  output cplx_t hdz [B]
);
  cplx_t dz;
  cplx_t h_q [B];
  logic  s1_v;

  always_ff @(posedge clk) begin
    dz  <= csub(z_new, z_old);
    h_q <= h;
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < B; i++)
      hdz[i] <= cmul(h_q[i], dz);
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
