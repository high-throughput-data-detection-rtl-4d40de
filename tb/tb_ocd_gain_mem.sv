// tb_ocd_gain_mem: writes every word of the gain memory, then reads all back
// in random order and checks the data and the 1-cycle read latency.
module tb_ocd_gain_mem;
  import ocd_pkg::*;
  localparam int unsigned S = 24, UMAX = 32, DEPTH = S * UMAX, AW = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  word_t         wd_inv, wp, rd_inv, rp;
  int            ref_d [DEPTH], ref_p [DEPTH];

  ocd_gain_mem #(.S(S), .UMAX(UMAX)) dut (.clk, .we, .waddr, .wd_inv, .wp, .raddr, .rd_inv, .rp);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      ref_d[i] = int'($urandom_range(32767)); ref_p[i] = int'($urandom_range(32767));
      we <= 1'b1; waddr <= AW'(i); wd_inv <= word_t'(ref_d[i]); wp <= word_t'(ref_p[i]);
      @(posedge clk);
    end
    we <= 1'b0;
    for (int n = 0; n < 2 * DEPTH; n++) begin
      automatic int a = int'($urandom_range(DEPTH - 1));
      raddr <= AW'(a);
      @(posedge clk);
      #1;
      checks++;
      if (int'(rd_inv) != ref_d[a] || int'(rp) != ref_p[a]) begin
        failures++; $display("addr %0d: %0d %0d vs %0d %0d", a, rd_inv, rp, ref_d[a], ref_p[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
