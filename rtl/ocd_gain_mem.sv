// ocd_gain_mem: storage of the preprocessing results d_u^-1 and p_u for all
// S interleaved subcarriers and up to UMAX users (S*UMAX words of 32 bits,
// d_u^-1 in the upper and p_u in the lower half). Written once per
// (subcarrier, user) during preprocessing and read once per OCD update.
// Simple dual-port array: synchronous write, synchronous read with 1 cycle
// latency (read-before-write on a same-address collision, which the schedule
// never produces). Address = subcarrier * UMAX + user.
module ocd_gain_mem
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
  input  word_t         wd_inv,
  input  word_t         wp,
  input  logic [AW-1:0] raddr,
  output word_t         rd_inv,
  output word_t         rp
);
  logic [2*W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= {wd_inv, wp};
    {rd_inv, rp} <= mem[raddr];
  end

endmodule
