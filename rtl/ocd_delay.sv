// ocd_delay: N-stage register delay line for a value of any type T (N = 0
// is a wire). Used to carry h_u, r, z_u^(k-1), d_u^-1, p_u and the operation tag
// alongside the datapath so that each unit sees the operands of the same
// operation. Data only: it has no reset, so valid bits travel in separate,
// reset registers.
module ocd_delay #(
  parameter type         T = logic,
  parameter int unsigned N = 1
) (
  input  logic clk,
  input  T     d,
  output T     q
);
  if (N == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    T pipe [N];
    always_ff @(posedge clk) begin
      pipe[0] <= d;
      for (int i = 1; i < N; i++) pipe[i] <= pipe[i-1];
    end
    assign q = pipe[N-1];
  end
endmodule
