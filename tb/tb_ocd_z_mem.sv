// tb_ocd_z_mem: random writes and reads of the z memory against a reference
// array, with simultaneous read and write of different addresses and the
// 1-cycle read latency.
module tb_ocd_z_mem;
  import ocd_pkg::*;
  localparam int unsigned S = 24, UMAX = 32, DEPTH = S * UMAX, AW = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  cplx_t         wdata, rdata;
  cplx_t         ref_m [DEPTH];

  ocd_z_mem #(.S(S), .UMAX(UMAX)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      ref_m[i] = cplx_t'($urandom);
      we <= 1'b1; waddr <= AW'(i); wdata <= ref_m[i];
      @(posedge clk);
    end
    for (int n = 0; n < 3 * DEPTH; n++) begin
      automatic int a = int'($urandom_range(DEPTH - 1));
      automatic int w = int'($urandom_range(DEPTH - 1));
      automatic cplx_t expv = ref_m[a];
      if (w == a) w = (w + 1) % DEPTH;
      raddr <= AW'(a);
      we <= n[0]; waddr <= AW'(w); wdata <= cplx_t'($urandom);
      @(posedge clk);
      #1;
      if (we) ref_m[w] = wdata;
      checks++;
      if (rdata != expv) begin failures++; $display("addr %0d: %h vs %h", a, rdata, expv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
