// tb_ocd_rupdate: checks the saturating residual update r - hdz on all B
// entries and its 1-cycle latency.
module tb_ocd_rupdate;
  import ocd_pkg::*;
  localparam int unsigned B = 128;
  localparam int N = 30;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  in_valid = 1'b0, out_valid;
  cplx_t r [B], hdz [B], r_new [B];

  ocd_rupdate #(.B(B)) dut (.clk, .rst_n, .in_valid, .r, .hdz, .out_valid, .r_new);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int st(input int v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int n = 0; n < N; n++) begin
      int er [B], ei [B], bad;
      for (int i = 0; i < B; i++) begin
        int a, b, c, d;
        a = $signed($urandom_range(65535)) - 32768; b = $signed($urandom_range(65535)) - 32768;
        c = $signed($urandom_range(65535)) - 32768; d = $signed($urandom_range(65535)) - 32768;
        r[i].re <= word_t'(a); r[i].im <= word_t'(b);
        hdz[i].re <= word_t'(c); hdz[i].im <= word_t'(d);
        er[i] = st(a - c); ei[i] = st(b - d);
      end
      in_valid <= 1'b1;
      @(posedge clk);
      in_valid <= 1'b0;
      #1;
      bad = 0;
      for (int i = 0; i < B; i++)
        if (int'(r_new[i].re) != er[i] || int'(r_new[i].im) != ei[i]) bad++;
      checks += 2;
      if (bad != 0) begin failures++; $display("vector %0d: %0d wrong", n, bad); end
      if (!out_valid) begin failures++; $display("latency"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
