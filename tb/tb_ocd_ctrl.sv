// tb_ocd_ctrl: runs the scheduler for several (U, K) settings and checks the
// issued operation sequence (preprocessing, then K iterations, users in
// round robin, subcarriers innermost, one per cycle), the last-iteration
// flag, and the start-to-done time of S*(K+1)*U + DRAIN + 1 cycles.
module tb_ocd_ctrl;
  import ocd_pkg::*;
  localparam int unsigned S = 24, UMAX = 32, KMAX = 256, DRAIN = 15;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       start = 1'b0, busy, done;
  logic [5:0] num_users;
  logic [8:0] num_iter;
  tok_t       tok;

  ocd_ctrl #(.S(S), .UMAX(UMAX), .KMAX(KMAX), .DRAIN(DRAIN)) dut (
    .clk, .rst_n, .start, .num_users, .num_iter, .tok, .busy, .done);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int u, input int k);
    int n = 0, cyc = 0, bad = 0, ue, ke;
    ue = (u == 0) ? 1 : u; ke = (k == 0) ? 1 : k;
    num_users <= 6'(u); num_iter <= 9'(k); start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    forever begin
      #1;
      cyc++;
      if (tok.valid) begin
        int ph = n / (S * ue);             // 0 = preprocessing, 1.. = iterations
        int exp_u = (n / S) % ue, exp_s = n % S;
        if (tok.pre != (ph == 0) || int'(tok.user) != exp_u || int'(tok.sc) != exp_s ||
            tok.last != (ph == ke)) bad++;
        n++;
      end
      if (done) break;
      @(posedge clk);
    end
    checks += 3;
    if (bad != 0) begin failures++; $display("U=%0d K=%0d: %0d tokens out of order", u, k, bad); end
    if (n != S * ue * (ke + 1)) begin failures++; $display("U=%0d K=%0d: %0d tokens", u, k, n); end
    if (cyc != S * ue * (ke + 1) + DRAIN + 1) begin
      failures++; $display("U=%0d K=%0d: done after %0d cycles", u, k, cyc);
    end
    @(posedge clk);
    checks++;
    #1;
    if (busy) begin failures++; $display("still busy"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run(8, 3);
    run(1, 1);
    run(32, 2);
    run(5, 4);
    run(0, 0);
    run(2, 256);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
