// tb_ocd_inner_product: checks sum_i conj(a_i) b_i of the inner-product unit
// against a 64-bit reference, including its 1 + log2(B) cycle latency and
// back-to-back throughput of one result per cycle.
module tb_ocd_inner_product;
  import ocd_pkg::*;
  localparam int unsigned B = 128;
  localparam int unsigned LAT = 1 + $clog2(B);
  localparam int N = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  in_valid = 1'b0, out_valid;
  cplx_t a [B], b [B];
  acc_t  sum;

  ocd_inner_product #(.B(B)) dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .sum);

  longint exp_re [N], exp_im [N];

  function automatic word_t rnd(input int range);
    return word_t'($signed($urandom_range(2 * range)) - range);
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got = 0;
  int issue_cycle [N], cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (got >= N || sum.re != ACC_W'(exp_re[got]) || sum.im != ACC_W'(exp_im[got])) begin
      failures++;
      $display("mismatch %0d: got %0d %0d exp %0d %0d", got, sum.re, sum.im, exp_re[got], exp_im[got]);
    end
    checks++;
    if (got < N && cyc - issue_cycle[got] != LAT) begin
      failures++;
      $display("latency %0d, expected %0d", cyc - issue_cycle[got], LAT);
    end
    got++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < N; n++) begin
      automatic longint sr = 0, si = 0;
      automatic int rng = (n < 4) ? 32767 : 4096;   // first vectors at full scale
      for (int i = 0; i < B; i++) begin
        word_t ar, ai, br, bi;
        ar = rnd(rng); ai = rnd(rng);
        br = (n == 1) ? ar : rnd(rng);
        bi = (n == 1) ? ai : rnd(rng);
        a[i].re <= ar; a[i].im <= ai; b[i].re <= br; b[i].im <= bi;
        sr += longint'(ar) * br + longint'(ai) * bi;
        si += longint'(ar) * bi - longint'(ai) * br;
      end
      exp_re[n] = sr; exp_im[n] = si;
      in_valid <= 1'b1;
      issue_cycle[n] = cyc + 1;
      @(posedge clk);
      // a gap after the first few to test isolated operation
      if (n == 2) begin in_valid <= 1'b0; repeat (LAT + 2) @(posedge clk); end
    end
    in_valid <= 1'b0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (got != N) begin failures++; $display("got %0d results, expected %0d", got, N); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
