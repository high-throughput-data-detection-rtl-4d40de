// tb_ocd_zupdate: checks z_new = proj(d * hr + p * z_old) bit-exactly against
// an integer reference (truncating Q5.11 products, saturation, clipping) in
// all modes (MMSE, BOX, BOX for BPSK), with the 2-cycle latency and back-to-back updates.
module tb_ocd_zupdate;
  import ocd_pkg::*;
  localparam int N = 500;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  in_valid = 1'b0, box_mode = 1'b0, bpsk = 1'b0, out_valid, clipped;
  cplx_t hr, z_old, z_new;
  word_t d_inv, p, radius;

  ocd_zupdate dut (.clk, .rst_n, .in_valid, .hr, .d_inv, .p, .z_old, .box_mode, .bpsk,
                   .radius, .out_valid, .z_new, .clipped);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fl(input longint v);       // floor(v / 2048)
    longint q = v / 2048;
    if (v < 0 && q * 2048 != v) q -= 1;
    return int'(q);
  endfunction
  function automatic int st(input longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction
  function automatic int one(input int h, input int d, input int z, input int pp, input int r, input bit box, input bit zero);
    int s = st(longint'(st(fl(longint'(h) * d))) + st(fl(longint'(z) * pp)));
    if (box) s = (s > r) ? r : (s < -r) ? -r : s;
    if (box && zero) s = 0;
    return s;
  endfunction

  int er [N], ei [N];
  int got = 0, cyc = 0, icyc [N], nclip = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (int'(z_new.re) != er[got] || int'(z_new.im) != ei[got]) begin
      failures++; $display("%0d: got %0d,%0d exp %0d,%0d", got, z_new.re, z_new.im, er[got], ei[got]);
    end
    if (cyc - icyc[got] != 2) begin failures++; $display("latency"); end
    if (clipped) nclip++;
    got++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    radius <= 16'sd2212;
    @(posedge clk);
    for (int n = 0; n < N; n++) begin
      int a, b, c, dd, d2, pp;
      automatic bit bx = (n >= N / 2);
      automatic bit bp = (n >= 3 * N / 4);
      if (n == 3 * N / 4) begin     // modes are static per batch: drain first
        in_valid <= 1'b0;
        repeat (4) @(posedge clk);
      end
      a  = $signed($urandom_range(8000)) - 4000;
      b  = $signed($urandom_range(8000)) - 4000;
      c  = $signed($urandom_range(6000)) - 3000;
      dd = $signed($urandom_range(6000)) - 3000;
      d2 = int'($urandom_range(4000, 1000));
      pp = bx ? 2048 : int'($urandom_range(2048, 1000));
      if (n == 5) begin a = 32767; d2 = 32767; end     // saturation
      hr.re <= word_t'(a); hr.im <= word_t'(b);
      z_old.re <= word_t'(c); z_old.im <= word_t'(dd);
      d_inv <= word_t'(d2); p <= word_t'(pp); box_mode <= bx; bpsk <= bp;
      er[n] = one(a, d2, c, pp, 2212, bx, 1'b0);
      ei[n] = one(b, d2, dd, pp, 2212, bx, bp);
      in_valid <= 1'b1;
      icyc[n] = cyc + 1;
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (4) @(posedge clk);
    checks += 2;
    if (got != N) begin failures++; $display("got %0d", got); end
    if (nclip == 0) begin failures++; $display("no clipping seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
