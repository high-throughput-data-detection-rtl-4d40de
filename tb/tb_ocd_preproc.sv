// tb_ocd_preproc: checks d = 1/(g + alpha) and p = d * g against real-valued
// references (MMSE: alpha > 0; BOX: alpha = 0, so p must be 1) and the
// 5-cycle latency, with back-to-back inputs.
module tb_ocd_preproc;
  import ocd_pkg::*;
  localparam int LAT = 5;
  localparam int N = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  in_valid = 1'b0, out_valid;
  word_t g, alpha, d_inv, p;

  ocd_preproc dut (.clk, .rst_n, .in_valid, .g, .alpha, .out_valid, .d_inv, .p);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int gv [N], av [N], icyc [N];
  int cyc = 0, got = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    real de, pe;
    de = 2048.0 * 2048.0 / real'(gv[got] + av[got]);
    if (de > 32767.0) de = 32767.0;
    pe = real'(gv[got]) / real'(gv[got] + av[got]) * 2048.0;
    checks += 3;
    if (cyc - icyc[got] != LAT) begin failures++; $display("latency %0d", cyc - icyc[got]); end
    if (real'(d_inv) > de * 1.001 + 1.5 || real'(d_inv) < de * 0.999 - 1.5) begin
      failures++; $display("d_inv %0d exp %f (g=%0d a=%0d)", d_inv, de, gv[got], av[got]);
    end
    if (real'(p) > pe * 1.002 + 2.0 || real'(p) < pe * 0.998 - 2.0) begin
      failures++; $display("p %0d exp %f (g=%0d a=%0d)", p, pe, gv[got], av[got]);
    end
    got++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < N; n++) begin
      gv[n] = int'($urandom_range(4096, 512));          // 0.25 .. 2.0
      av[n] = (n % 2) ? int'($urandom_range(1024, 1)) : 0;  // MMSE / BOX
      g <= word_t'(gv[n]); alpha <= word_t'(av[n]);
      in_valid <= 1'b1;
      icyc[n] = cyc + 1;
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (got != N) begin failures++; $display("got %0d of %0d", got, N); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
