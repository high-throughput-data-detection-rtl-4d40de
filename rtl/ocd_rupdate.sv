// ocd_rupdate: residual update r <- r - h_u * Delta z_u on all B entries in
// parallel (line 14 of the OCD algorithm, the output adder of the
// equalization datapath). Saturating Q5.11 subtraction, registered: latency
// 1 cycle. The register is this design's choice.
module ocd_rupdate
  import ocd_pkg::*;
#(
  parameter int unsigned B = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t r [B],
  input  cplx_t hdz [B],
  output logic  out_valid,
  output cplx_t r_new [B]
);
  always_ff @(posedge clk) begin
    for (int i = 0; i < B; i++)
      r_new[i] <= csub(r[i], hdz[i]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
