// ocd_z_mem: storage of the current symbol estimates z_u (one complex Q5.11
// word) for all S interleaved subcarriers and up to UMAX users. Preprocessing
// writes zeros (z^(0) = 0); every equalization update reads z^(k-1) and
// writes z^(k) back. Simple dual-port array with synchronous write and
// 1-cycle synchronous read. Address = subcarrier * UMAX + user.
module ocd_z_mem
  import ocd_pkg::*;
#(
  parameter int unsigned S    = 24,
  parameter int unsigned UMAX = 32,
  localparam int unsigned DEPTH = S * UMAX,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  cplx_t         wdata,
  input  logic [AW-1:0] raddr,
  output cplx_t         rdata
);
  cplx_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
