// tb_ocd_proj: checks the projection: identity in MMSE mode, independent
// clipping of real and imaginary part to [-R, R] in BOX mode, and real-part
// clipping with a zeroed imaginary part in BOX mode for BPSK.
module tb_ocd_proj;
  import ocd_pkg::*;
  int checks = 0, failures = 0;

  logic  box_mode, bpsk, clipped;
  word_t radius;
  cplx_t w, q;

  ocd_proj dut (.box_mode, .bpsk, .radius, .w, .q, .clipped);

  function automatic int clipr(input int v, input int r);
    return (v > r) ? r : (v < -r) ? -r : v;
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int wr, wi, rr, er, ei;
      wr = $signed($urandom_range(20000)) - 10000;
      wi = $signed($urandom_range(20000)) - 10000;
      rr = int'($urandom_range(5000, 100));
      box_mode = n[0];
      bpsk = n[1];
      radius = word_t'(rr); w.re = word_t'(wr); w.im = word_t'(wi);
      #1;
      er = box_mode ? clipr(wr, rr) : wr;
      ei = box_mode ? (bpsk ? 0 : clipr(wi, rr)) : wi;
      checks++;
      if (int'(q.re) != er || int'(q.im) != ei) begin
        failures++; $display("mode %0d/%0d w=%0d,%0d R=%0d q=%0d,%0d", box_mode, bpsk, wr, wi, rr, q.re, q.im);
      end
      checks++;
      if (clipped != (er != wr || ei != wi)) begin failures++; $display("clipped flag wrong"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
