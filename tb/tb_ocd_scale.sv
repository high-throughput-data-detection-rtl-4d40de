// tb_ocd_scale: checks h_i * (z_new - z_old) for all B entries bit-exactly
// against an integer reference and the 2-cycle latency.
module tb_ocd_scale;
  import ocd_pkg::*;
  localparam int unsigned B = 128;
  localparam int N = 30;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  in_valid = 1'b0, out_valid;
  cplx_t z_new, z_old, h [B], hdz [B];

  ocd_scale #(.B(B)) dut (.clk, .rst_n, .in_valid, .z_new, .z_old, .h, .out_valid, .hdz);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fl(input longint v);
    longint q = v / 2048;
    if (v < 0 && q * 2048 != v) q -= 1;
    return int'(q);
  endfunction
  function automatic int st(input longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  int er [N][B], ei [N][B];
  int got = 0, cyc = 0, icyc [N];
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && out_valid) begin
    int bad = 0;
    for (int i = 0; i < B; i++)
      if (int'(hdz[i].re) != er[got][i] || int'(hdz[i].im) != ei[got][i]) bad++;
    checks += 2;
    if (bad != 0) begin failures++; $display("vector %0d: %0d entries wrong", got, bad); end
    if (cyc - icyc[got] != 2) begin failures++; $display("latency"); end
    got++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < N; n++) begin
      int a, b, c, d, dr, di;
      a = $signed($urandom_range(6000)) - 3000; b = $signed($urandom_range(6000)) - 3000;
      c = $signed($urandom_range(6000)) - 3000; d = $signed($urandom_range(6000)) - 3000;
      if (n == 3) begin a = 32000; c = -32000; end   // Delta z saturates
      z_new.re <= word_t'(a); z_new.im <= word_t'(b);
      z_old.re <= word_t'(c); z_old.im <= word_t'(d);
      dr = st(a - c); di = st(b - d);
      for (int i = 0; i < B; i++) begin
        int hr, hi;
        hr = $signed($urandom_range(8000)) - 4000; hi = $signed($urandom_range(8000)) - 4000;
        h[i].re <= word_t'(hr); h[i].im <= word_t'(hi);
        er[n][i] = st(fl(longint'(hr) * dr - longint'(hi) * di));
        ei[n][i] = st(fl(longint'(hr) * di + longint'(hi) * dr));
      end
      in_valid <= 1'b1;
      icyc[n] = cyc + 1;
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (got != N) begin failures++; $display("got %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
