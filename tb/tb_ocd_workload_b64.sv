// tb_ocd_workload_b64: end-to-end test of the OCD detector built for B = 64 antennas, 8 users, K = 3, as in the 64 x 8 system evaluated for error rate.
// It fills the external channel and receive memories with random 64-QAM
// (and, in one batch, BPSK) uplink data (y = H s + noise, entries Q5.11), runs complete batches of S
// interleaved subcarriers in BOX and MMSE mode, and compares every final
// estimate z_u, every gain p_u and every final residual entry with an
// integer reference of the same fixed-point algorithm written as plain
// loops below. It also checks the start-to-done time S*(K+1)*U + 9 + log2(B)
// cycles, that a long noise-free BOX run converges to the transmitted
// symbols, and that each mechanism (preprocessing, equalization, per-cycle
// switch between them, BOX clipping, MMSE mode, residual write-back,
// a residual loop filled with distinct subcarriers) occurred.
module tb_ocd_workload_b64;
  import ocd_pkg::*;

  localparam int unsigned B    = 64;
  localparam int unsigned S    = 24;    // defaults of ocd_detector
  localparam int unsigned UMAX = 32;
  localparam int unsigned UT   = 8;     // most users used by this test
  localparam int unsigned L    = $clog2(B);
  localparam int unsigned AW   = $clog2(S * UMAX);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ------------------------------------------------------------------ DUT
  logic            start = 1'b0, busy, done, box_mode = 1'b0, bpsk_mode = 1'b0;
  logic [5:0]      num_users = '0;
  logic [8:0]      num_iter = '0;
  word_t           alpha = '0, box_radius = '0;
  logic            h_rd_en, r_rd_en, r_wr_en, out_valid;
  logic [AW-1:0]   h_rd_addr;
  logic [SC_W-1:0] r_rd_addr, r_wr_addr, out_sc;
  logic [USER_W-1:0] out_user;
  cplx_t           h_rd_data [B], r_rd_data [B], r_wr_data [B];
  cplx_t           out_z;
  word_t           out_p;

  ocd_detector #(.B(B)) dut (
    .clk, .rst_n, .start, .num_users, .num_iter, .box_mode, .bpsk_mode, .alpha, .box_radius,
    .busy, .done, .h_rd_en, .h_rd_addr, .h_rd_data, .r_rd_en, .r_rd_addr, .r_rd_data,
    .r_wr_en, .r_wr_addr, .r_wr_data, .out_valid, .out_sc, .out_user, .out_z, .out_p);

  ocd_ext_mem #(.B(B), .S(S), .UMAX(UMAX)) mem (
    .clk, .h_rd_en, .h_rd_addr, .h_rd_data, .r_rd_en, .r_rd_addr, .r_rd_data,
    .r_wr_en, .r_wr_addr, .r_wr_data);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ----------------------------------------------------- reference model
  int hre [S][UT][B], him [S][UT][B];
  int sre [S][UT], sim [S][UT];          // transmitted symbols
  int rre [S][B], rim [S][B];            // reference residual
  int zre [S][UT], zim [S][UT], pr [S][UT];

  function automatic int st(input longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  // 1/x in Q5.11: leading one to bit 15, 11 following bits index a table of
  // round(2^28 / (2048 + i + 0.5)), result scaled by 2^(5 - e).
  function automatic int recip(input int x);
    int e, idx;
    longint t, m;
    if (x <= 0) return 32767;
    e = 0;
    for (int k = 0; k < 15; k++) if (((x >> k) & 1) != 0) e = k;
    m   = longint'(x) << (15 - e);
    idx = int'((m >> 4) & 2047);
    t   = ((longint'(1) << 30) / longint'(4097 + 2 * idx) + 1) / 2;
    if (e > 5)      t = (t + (longint'(1) << (e - 6))) >> (e - 5);
    else if (e < 5) t = t << (5 - e);
    return (t > 32767) ? 32767 : int'(t);
  endfunction

  task automatic ref_run(input int s, input int U, input int K, input bit box,
                         input int a, input int rad, input bit bp);
    int d [UT];
    for (int u = 0; u < U; u++) begin
      longint acc = 0;
      int g;
      for (int i = 0; i < B; i++)
        acc += longint'(hre[s][u][i]) * hre[s][u][i] + longint'(him[s][u][i]) * him[s][u][i];
      g = st(acc >>> (L + 11));
      d[u] = recip(st(longint'(g) + a));
      pr[s][u] = st((longint'(d[u]) * g) >>> 11);
      zre[s][u] = 0; zim[s][u] = 0;
    end
    for (int k = 0; k < K; k++) begin
      for (int u = 0; u < U; u++) begin
        longint ar = 0, ai = 0;
        int hr, hi, nr, ni, dr, di;
        for (int i = 0; i < B; i++) begin
          ar += longint'(hre[s][u][i]) * rre[s][i] + longint'(him[s][u][i]) * rim[s][i];
          ai += longint'(hre[s][u][i]) * rim[s][i] - longint'(him[s][u][i]) * rre[s][i];
        end
        hr = st(ar >>> (L + 11)); hi = st(ai >>> (L + 11));
        nr = st(longint'(st((longint'(hr) * d[u]) >>> 11)) + st((longint'(zre[s][u]) * pr[s][u]) >>> 11));
        ni = st(longint'(st((longint'(hi) * d[u]) >>> 11)) + st((longint'(zim[s][u]) * pr[s][u]) >>> 11));
        if (box) begin
          nr = (nr > rad) ? rad : (nr < -rad) ? -rad : nr;
          ni = (ni > rad) ? rad : (ni < -rad) ? -rad : ni;
          if (bp) ni = 0;
        end
        dr = st(longint'(nr) - zre[s][u]); di = st(longint'(ni) - zim[s][u]);
        for (int i = 0; i < B; i++) begin
          int qr, qi;
          qr = st((longint'(hre[s][u][i]) * dr - longint'(him[s][u][i]) * di) >>> 11);
          qi = st((longint'(hre[s][u][i]) * di + longint'(him[s][u][i]) * dr) >>> 11);
          rre[s][i] = st(longint'(rre[s][i]) - qr);
          rim[s][i] = st(longint'(rim[s][i]) - qi);
        end
        zre[s][u] = nr; zim[s][u] = ni;
      end
    end
  endtask

  // ------------------------------------------------------- observation
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int got_zre [S][UT], got_zim [S][UT], got_p [S][UT], got_n [S][UT];
  int n_out = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    if (int'(out_sc) < S && int'(out_user) < UT) begin
      got_zre[out_sc][out_user] = int'(out_z.re);
      got_zim[out_sc][out_user] = int'(out_z.im);
      got_p[out_sc][out_user]   = int'(out_p);
      got_n[out_sc][out_user]++;
    end
    n_out++;
  end

  // mechanism counters
  int n_bpsk = 0, n_pre = 0, n_eq = 0, n_switch = 0, n_clip = 0, n_rwr = 0, n_box = 0, n_mmse = 0;
  int n_full_interleave = 0;
  logic prev_pre = 1'b0, prev_v = 1'b0;
  logic [S-1:0] in_flight;
  always @(posedge clk) if (rst_n) begin
    if (dut.tok[1].valid) begin
      if (dut.tok[1].pre) n_pre++; else n_eq++;
      if (prev_v && prev_pre && !dut.tok[1].pre) n_switch++;
    end
    prev_v   <= dut.tok[1].valid;
    prev_pre <= dut.tok[1].pre;
    if (dut.zclip) n_clip++;
    if (r_wr_en) n_rwr++;
  end
  // pipeline interleaving: every stage of the residual loop (issue to
  // write-back, 9 + log2(B) stages) holds a different subcarrier
  localparam int unsigned WB = 8 + L;
  always @(posedge clk) if (rst_n) begin
    logic [S-1:0] m;
    int cnt;
    m = '0; cnt = 0;
    for (int i = 0; i <= WB; i++)
      if (dut.tok[i].valid && !dut.tok[i].pre) m[dut.tok[i].sc] = 1'b1;
    for (int i = 0; i < S; i++) if (m[i]) cnt++;
    if (cnt == WB + 1) n_full_interleave++;
  end

  // ------------------------------------------------------------- one batch
  task automatic run(input int U, input int K, input bit box, input int a,
                     input int rad, input int noise, input bit conv_check,
                     input bit bp = 1'b0);
    int t0, lat, bad_z, bad_p, bad_r, bad_n;
    longint err;
    // data: BPSK +-1, or 64-QAM levels +-1,3,5,7 / sqrt(42) in Q5.11
    for (int s = 0; s < S; s++) begin
      for (int u = 0; u < U; u++) begin
        sre[s][u] = bp ? (2 * int'($urandom_range(1)) - 1) * 2048 : (2 * int'($urandom_range(7)) - 7) * 316;
        sim[s][u] = bp ? 0 : (2 * int'($urandom_range(7)) - 7) * 316;
        for (int i = 0; i < B; i++) begin
          hre[s][u][i] = int'($urandom_range(4096)) - 2048;
          him[s][u][i] = int'($urandom_range(4096)) - 2048;
          mem.h[s * UMAX + u][i].re = word_t'(hre[s][u][i]);
          mem.h[s * UMAX + u][i].im = word_t'(him[s][u][i]);
        end
      end
      for (int i = 0; i < B; i++) begin
        longint yr = 0, yi = 0;
        for (int u = 0; u < U; u++) begin
          yr += longint'(hre[s][u][i]) * sre[s][u] - longint'(him[s][u][i]) * sim[s][u];
          yi += longint'(hre[s][u][i]) * sim[s][u] + longint'(him[s][u][i]) * sre[s][u];
        end
        rre[s][i] = st((yr >>> 11) + longint'(int'($urandom_range(2 * noise)) - noise));
        rim[s][i] = st((yi >>> 11) + longint'(int'($urandom_range(2 * noise)) - noise));
        mem.r[s][i].re = word_t'(rre[s][i]);
        mem.r[s][i].im = word_t'(rim[s][i]);
      end
      for (int u = 0; u < UT; u++) got_n[s][u] = 0;
      ref_run(s, U, K, box, a, rad, bp);
    end
    n_out = 0;
    if (box) n_box++; else n_mmse++;
    if (bp) n_bpsk++;

    @(posedge clk);
    num_users <= 6'(U); num_iter <= 9'(K); box_mode <= box; bpsk_mode <= bp; alpha <= word_t'(a);
    box_radius <= word_t'(rad); start <= 1'b1;
    t0 = cyc + 1;                       // cycle in which start is high
    @(posedge clk);
    start <= 1'b0;
    wait (done);
    lat = cyc - t0;
    @(posedge clk);
    checks++;
    if (lat != S * (K + 1) * U + 9 + L) begin
      failures++; $display("U=%0d K=%0d: latency %0d, expected %0d", U, K, lat, S * (K + 1) * U + 9 + L);
    end
    bad_z = 0; bad_p = 0; bad_r = 0; bad_n = 0; err = 0;
    for (int s = 0; s < S; s++) begin
      for (int u = 0; u < U; u++) begin
        if (got_n[s][u] != 1) bad_n++;
        if (got_zre[s][u] != zre[s][u] || got_zim[s][u] != zim[s][u]) bad_z++;
        if (got_p[s][u] != pr[s][u]) bad_p++;
        err += longint'((got_zre[s][u] > sre[s][u]) ? got_zre[s][u] - sre[s][u] : sre[s][u] - got_zre[s][u]);
        err += longint'((got_zim[s][u] > sim[s][u]) ? got_zim[s][u] - sim[s][u] : sim[s][u] - got_zim[s][u]);
      end
      for (int i = 0; i < B; i++)
        if (int'(mem.r[s][i].re) != rre[s][i] || int'(mem.r[s][i].im) != rim[s][i]) bad_r++;
    end
    checks += 5;
    if (bad_n != 0 || n_out != S * U) begin failures++; $display("output count wrong (%0d, %0d)", bad_n, n_out); end
    if (bad_z != 0) begin failures++; $display("U=%0d K=%0d box=%0d: %0d estimates differ", U, K, box, bad_z); end
    if (bad_p != 0) begin failures++; $display("%0d gains differ", bad_p); end
    if (bad_r != 0) begin failures++; $display("%0d residual entries differ", bad_r); end
    if (box && a == 0 && bad_p == 0) begin
      int far = 0;
      for (int s = 0; s < S; s++) for (int u = 0; u < U; u++)
        if (pr[s][u] < 2040 || pr[s][u] > 2056) far++;
      if (far != 0) begin failures++; $display("BOX mode: p_u not 1 for %0d users", far); end
    end
    if (conv_check) begin
      checks++;
      // mean absolute error per real dimension below 0.05 (102 LSB)
      if (err > longint'(102) * 2 * S * U) begin
        failures++; $display("no convergence: mean error %0d LSB", err / (2 * S * U));
      end
    end
    $display("run U=%0d K=%0d box=%0d bpsk=%0d: latency %0d cycles, mean |z-s| %0d LSB",
             U, K, box, bp, lat, err / (2 * S * U));
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    run(8, 3, 1'b1, 0, 2212, 20, 1'b0);     // BOX
    run(8, 3, 1'b0, 16, 0, 20, 1'b0);      // MMSE
    checks += 7;
    if (n_pre == 0)    begin failures++; $display("no preprocessing operation"); end
    if (n_eq == 0)     begin failures++; $display("no equalization operation"); end
    if (n_switch == 0) begin failures++; $display("no preprocessing-to-equalization switch"); end
    if (n_clip == 0)   begin failures++; $display("no BOX clipping"); end
    if (n_mmse == 0 || n_box == 0) begin failures++; $display("a mode was not run"); end
    if (n_rwr == 0)    begin failures++; $display("no residual write-back"); end
    if (n_full_interleave == 0) begin failures++; $display("pipeline never filled with distinct subcarriers"); end
    $display("mechanisms: pre=%0d eq=%0d switch=%0d clip=%0d rwrite=%0d mmse=%0d box=%0d bpsk=%0d full_interleave=%0d",
             n_pre, n_eq, n_switch, n_clip, n_rwr, n_mmse, n_box, n_bpsk, n_full_interleave);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
