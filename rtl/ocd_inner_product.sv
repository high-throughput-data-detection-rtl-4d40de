// ocd_inner_product: complex inner product sum_i conj(a_i) * b_i of two
// B-entry vectors, the unit shared by preprocessing (a = b = h_u gives
// ||h_u||^2) and equalization (a = h_u, b = r gives h_u^H r).
//
// B complex multipliers form the entry-wise products in full Q10.22
// precision; a balanced adder tree of 36-bit adders sums them. One register
// stage follows the multipliers and one follows each tree level, so the
// latency is 1 + ceil(log2 B) cycles at a throughput of one inner product per
// cycle. The multiplier array, the balanced tree and the 36-bit adders follow
// the paper; the register placement is this design's choice. Adders wrap; for
// unit-power entries the sum stays far below 2^35 (Q.22).
//
// Interface: in_valid/a/b in, out_valid/sum out (sum: 36-bit re and im, Q.22).
module ocd_inner_product
  import ocd_pkg::*;
#(
  parameter int unsigned B = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t a [B],
  input  cplx_t b [B],
  output logic  out_valid,
  output acc_t  sum
);
  localparam int unsigned LEVELS = (B > 1) ? $clog2(B) : 0;
  localparam int unsigned NP     = 1 << LEVELS;  // B padded to a power of two
  localparam int unsigned LAT    = 1 + LEVELS;

  acc_t tree [LEVELS+1][NP];
  logic [LAT-1:0] vld;

  // Multiplier stage: conj(a) * b, full precision.
  always_ff @(posedge clk) begin
    for (int i = 0; i < NP; i++) begin
      if (i < B) begin
        tree[0][i].re <= ACC_W'(a[i].re) * ACC_W'(b[i].re) + ACC_W'(a[i].im) * ACC_W'(b[i].im);
        tree[0][i].im <= ACC_W'(a[i].re) * ACC_W'(b[i].im) - ACC_W'(a[i].im) * ACC_W'(b[i].re);
      end else begin
        tree[0][i] <= '0;
      end
    end
  end

  // Balanced adder tree, one register per level.
  always_ff @(posedge clk) begin
    for (int l = 1; l <= LEVELS; l++) begin
      for (int i = 0; i < NP; i++) begin
        if (i < (NP >> l)) begin
          tree[l][i].re <= tree[l-1][2*i].re + tree[l-1][2*i+1].re;
          tree[l][i].im <= tree[l-1][2*i].im + tree[l-1][2*i+1].im;
        end else begin
          tree[l][i] <= '0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else        vld <= LAT'({vld, in_valid});
  end

  assign out_valid = vld[LAT-1];
  assign sum       = tree[LEVELS][0];

endmodule
