// tb_ocd_reciprocal: sweeps positive Q5.11 inputs and compares 1/x with the
// exact reciprocal (tolerance: table resolution plus one output LSB), checks
// saturation for tiny and non-positive inputs and the 3-cycle latency.
module tb_ocd_reciprocal;
  import ocd_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  in_valid = 1'b0, out_valid;
  word_t x, y;

  ocd_reciprocal dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input int xv);
    real exact, got, tol;
    x <= word_t'(xv);
    in_valid <= 1'b1;
    @(posedge clk);
    in_valid <= 1'b0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (!out_valid) begin failures++; $display("latency wrong for x=%0d", xv); end
    if (xv <= 0) begin
      checks++;
      if (y != 16'sh7FFF) begin failures++; $display("x=%0d y=%0d", xv, y); end
      return;
    end
    exact = 2048.0 * 2048.0 / real'(xv);            // 1/x in Q5.11 LSBs
    if (exact > 32767.0) exact = 32767.0;
    got = real'(y);
    tol = exact / 2048.0 + 1.0;
    checks++;
    if (got > exact + tol || got < exact - tol) begin
      failures++;
      $display("x=%0d y=%0d exact=%f", xv, y, exact);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    check_one(2048);   // 1.0
    check_one(1024);   // 0.5
    check_one(4096);   // 2.0
    check_one(0);
    check_one(-5);
    check_one(1);      // saturates
    check_one(100);
    check_one(32767);
    for (int n = 0; n < 3000; n++) check_one(int'($urandom_range(32767, 1)));
    for (int n = 1; n < 64; n++) check_one(n * 511);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
