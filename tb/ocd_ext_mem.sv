// ocd_ext_mem: behavioural model of the external memories the detector reads
// and writes: the channel memory (one B-entry column h_u per subcarrier slot
// and user) and the received-vector memory, which holds y before a batch and
// the residual r afterwards. Both reads return data one cycle after the
// request; writes take effect at the clock edge. Testbenches fill and read
// the arrays h and r directly.
module ocd_ext_mem
  import ocd_pkg::*;
#(
  parameter int unsigned B    = 128,
  parameter int unsigned S    = 24,
  parameter int unsigned UMAX = 32,
  localparam int unsigned AW  = $clog2(S * UMAX)
) (
  input  logic            clk,
  input  logic            h_rd_en,
  input  logic [AW-1:0]   h_rd_addr,
  output cplx_t           h_rd_data [B],
  input  logic            r_rd_en,
  input  logic [SC_W-1:0] r_rd_addr,
  output cplx_t           r_rd_data [B],
  input  logic            r_wr_en,
  input  logic [SC_W-1:0] r_wr_addr,
  input  cplx_t           r_wr_data [B]
);
  cplx_t h [S * UMAX][B];
  cplx_t r [S][B];

  always_ff @(posedge clk) begin
    if (h_rd_en) h_rd_data <= h[h_rd_addr];
    if (r_rd_en) r_rd_data <= r[r_rd_addr];
    if (r_wr_en) r[r_wr_addr] <= r_wr_data;
  end
endmodule
