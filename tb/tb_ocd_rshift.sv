// tb_ocd_rshift: checks the >> log2(B) shift and the conversion to saturated
// Q5.11 words, with a 1-cycle latency.
module tb_ocd_rshift;
  import ocd_pkg::*;
  localparam int unsigned B = 128;
  localparam int SH = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  in_valid = 1'b0, out_valid;
  acc_t  sum, shifted;
  cplx_t word;

  ocd_rshift #(.B(B)) dut (.clk, .rst_n, .in_valid, .sum, .out_valid, .shifted, .word);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_word(input longint v);
    longint q = v / (longint'(1) << (SH + 11));
    if (v < 0 && q * (longint'(1) << (SH + 11)) != v) q -= 1;   // floor
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return q;
  endfunction

  initial begin
    longint vr, vi;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int n = 0; n < 300; n++) begin
      case (n % 3)
        0: begin vr = longint'($signed($urandom)) * 8; vi = -longint'($signed($urandom)) * 3; end
        1: begin vr = longint'($signed($urandom_range(1 << 26))) - (1 << 25); vi = 0; end
        default: begin vr = (longint'(1) << 34) - 1; vi = -(longint'(1) << 34); end
      endcase
      sum.re <= ACC_W'(vr); sum.im <= ACC_W'(vi);
      in_valid <= 1'b1;
      @(posedge clk);
      in_valid <= 1'b0;
      #1;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid after 1 cycle"); end
      checks++;
      if (shifted.re != ACC_W'(vr >>> SH) || shifted.im != ACC_W'(vi >>> SH)) begin
        failures++; $display("shift mismatch %0d", n);
      end
      checks++;
      if (longint'(word.re) != ref_word(vr) || longint'(word.im) != ref_word(vi)) begin
        failures++; $display("word mismatch %0d: %0d %0d vs %0d %0d", n, word.re, word.im, ref_word(vr), ref_word(vi));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
