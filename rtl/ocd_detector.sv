// ocd_detector: optimized coordinate descent (OCD) data detector for the
// massive MU-MIMO-OFDM uplink, for B base-station antennas and up to UMAX
// users, with S subcarriers interleaved in one pipeline.
//
// For each subcarrier the detector solves min_z ||y - H z||^2 + g(z) by
// coordinate descent over the users: MMSE equalization (box_mode = 0,
// alpha = N0 in the 2^-b scale) or box-constrained equalization
// (box_mode = 1, alpha = 0, estimates clipped to +-box_radius; with
// bpsk_mode = 1 the imaginary part is forced to zero for BPSK).
// One batch runs in two phases on the same hardware:
//   preprocessing  d_u^-1 = 1/(||h_u||^2 + alpha), p_u = d_u^-1 ||h_u||^2
//   equalization   K times for every user u:
//                  z_u  = proj(d_u^-1 h_u^H r + p_u z_u)
//                  r   <- r - h_u (z_u_new - z_u_old)
// The inner-product unit and the right-shift unit serve both phases; a
// multiplexer in front of the inner product selects h_u (preprocessing) or r
// (equalization) per operation, so the phase can change every cycle.
//
// Pipeline (cycle offsets from the cycle c in which the scheduler issues an
// operation; L = ceil(log2 B)):
//   c        addresses to the external H and y/r memories, z and gain memory
//   c+1      operands arrive; input multiplexer; complex multipliers
//   c+2+L    inner product, then >> L and conversion to Q5.11 (c+3+L)
//   c+5+L    z update done: z written back, final estimates output
//   c+7+L    h_u * Delta z
//   c+8+L    new residual written to the external r memory (WB_LAT)
//   c+8+L    d_u^-1 and p_u written to the gain memory (preprocessing)
// The same subcarrier is issued again S cycles later, so the residual loop
// needs WB_LAT < S (checked at elaboration): 15 < 24 for B = 128.
// A batch takes S*(K+1)*U + WB_LAT + 1 cycles from start to done.
//
// External memories (not part of this design): H is read as one B-entry
// column per request (address = subcarrier * UMAX + user), y/r as one
// B-entry vector per subcarrier slot; both return data the cycle after the
// request. The host loads y into the r memory before start and reads the
// final residual afterwards. Final estimates z_u^(K) stream out on
// out_valid together with p_u, which equals the approximate post-equalization
// gain mu used for LLR computation.
//
// The algorithm, the shared units, the input multiplexer, pipeline
// interleaving of 24 subcarriers, the 16-bit Q5.11 words and the 36-bit adder
// tree follow the paper. The pipeline depth (the paper uses 24 stages), the
// memory interfaces, the start/done handshake and the output stream are this
// design's choices.
module ocd_detector
  import ocd_pkg::*;
#(
  parameter int unsigned B    = 128,
  parameter int unsigned S    = 24,
  parameter int unsigned UMAX = 32,
  parameter int unsigned KMAX = 256,
  localparam int unsigned AW  = $clog2(S * UMAX),
  localparam int unsigned UW  = $clog2(UMAX + 1),
  localparam int unsigned KW  = $clog2(KMAX + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // run-time configuration, sampled with start
  input  logic            start,
  input  logic [UW-1:0]   num_users,
  input  logic [KW-1:0]   num_iter,
  input  logic            box_mode,
  input  logic            bpsk_mode,
  input  word_t           alpha,
  input  word_t           box_radius,
  output logic            busy,
  output logic            done,
  // external channel memory
  output logic            h_rd_en,
  output logic [AW-1:0]   h_rd_addr,
  input  cplx_t           h_rd_data [B],
  // external received-vector / residual memory
  output logic            r_rd_en,
  output logic [SC_W-1:0] r_rd_addr,
  input  cplx_t           r_rd_data [B],
  output logic            r_wr_en,
  output logic [SC_W-1:0] r_wr_addr,
  output cplx_t           r_wr_data [B],
  // equalized outputs of the last iteration
  output logic            out_valid,
  output logic [SC_W-1:0] out_sc,
  output logic [USER_W-1:0] out_user,
  output cplx_t           out_z,
  output word_t           out_p
);
  localparam int unsigned L        = (B > 1) ? $clog2(B) : 0;
  localparam int unsigned LAT_IP   = 1 + L;
  localparam int unsigned T_SH     = 2 + LAT_IP;   // shift output valid
  localparam int unsigned T_Z      = T_SH + 2;     // z update output valid
  localparam int unsigned T_HDZ    = T_Z + 2;      // scaling output valid
  localparam int unsigned WB_LAT   = T_HDZ + 1;    // residual write cycle
  localparam int unsigned T_PRE    = T_SH + 5;     // preprocessing output valid
  localparam int unsigned TOK_LAST = (WB_LAT > T_PRE) ? WB_LAT : T_PRE;

  if (WB_LAT >= S) begin : g_bad_depth
    $error("ocd_detector: residual loop (%0d cycles) does not fit in S slots", WB_LAT);
  end

  typedef cplx_t vec_t [B];

  // ---------------------------------------------------------------- config
  logic  cfg_box, cfg_bpsk;
  word_t cfg_alpha, cfg_radius;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg_box    <= 1'b0;
      cfg_bpsk   <= 1'b0;
      cfg_alpha  <= '0;
      cfg_radius <= '0;
    end else if (start && !busy) begin
      cfg_box    <= box_mode;
      cfg_bpsk   <= bpsk_mode;
      cfg_alpha  <= alpha;
      cfg_radius <= box_radius;
    end
  end

  // ------------------------------------------------------------- scheduler
  tok_t tok [TOK_LAST+1];

  ocd_ctrl #(.S(S), .UMAX(UMAX), .KMAX(KMAX), .DRAIN(WB_LAT)) u_ctrl (
    .clk, .rst_n, .start, .num_users, .num_iter,
    .tok  (tok[0]),
    .busy, .done
  );

  always_ff @(posedge clk) begin
    for (int i = 1; i <= TOK_LAST; i++) begin
      if (!rst_n) tok[i] <= '0;
      else        tok[i] <= tok[i-1];
    end
  end

  function automatic logic [AW-1:0] addr_of(input tok_t t);
    return AW'(32'(t.sc) * UMAX + 32'(t.user));
  endfunction

  // ------------------------------------------------- memory read (cycle c)
  assign h_rd_en   = tok[0].valid;
  assign h_rd_addr = addr_of(tok[0]);
  assign r_rd_en   = tok[0].valid && !tok[0].pre;
  assign r_rd_addr = tok[0].sc;

  word_t g_dinv, g_p;
  cplx_t z_rd;
  logic  gm_we, zm_we;
  word_t pp_dinv, pp_p;
  cplx_t z_new;

  ocd_gain_mem #(.S(S), .UMAX(UMAX)) u_gain_mem (
    .clk,
    .we    (gm_we),
    .waddr (addr_of(tok[T_PRE])),
    .wd_inv(pp_dinv),
    .wp    (pp_p),
    .raddr (addr_of(tok[0])),
    .rd_inv(g_dinv),
    .rp    (g_p)
  );

  ocd_z_mem #(.S(S), .UMAX(UMAX)) u_z_mem (
    .clk,
    .we    (zm_we),
    .waddr (addr_of(tok[T_Z])),
    .wdata (tok[T_Z].pre ? cplx_t'('0) : z_new),
    .raddr (addr_of(tok[0])),
    .rdata (z_rd)
  );

  // --------------------------------- shared inner product (cycle c+1 in)
  vec_t  ip_b;
  always_comb begin
    for (int i = 0; i < B; i++)
      ip_b[i] = tok[1].pre ? h_rd_data[i] : r_rd_data[i];
  end

  logic ip_v;
  acc_t ip_sum;
  ocd_inner_product #(.B(B)) u_ip (
    .clk, .rst_n,
    .in_valid (tok[1].valid),
    .a        (h_rd_data),
    .b        (ip_b),
    .out_valid(ip_v),
    .sum      (ip_sum)
  );

  logic  sh_v;
  acc_t  sh_wide;
  cplx_t sh_word;
  ocd_rshift #(.B(B)) u_shift (
    .clk, .rst_n,
    .in_valid (ip_v),
    .sum      (ip_sum),
    .out_valid(sh_v),
    .shifted  (sh_wide),
    .word     (sh_word)
  );

  // ----------------------------------------------------- preprocessing path
  logic pp_v;
  ocd_preproc u_pre (
    .clk, .rst_n,
    .in_valid (sh_v && tok[T_SH].pre),
    .g        (sh_word.re),
    .alpha    (cfg_alpha),
    .out_valid(pp_v),
    .d_inv    (pp_dinv),
    .p        (pp_p)
  );
  assign gm_we = pp_v && tok[T_PRE].valid && tok[T_PRE].pre;

  // -------------------------------------------------------- z update path
  word_t dinv_d, p_d;
  cplx_t zold_sh, zold_z;
  ocd_delay #(.T(word_t), .N(T_SH - 1)) u_dl_dinv (.clk, .d(g_dinv), .q(dinv_d));
  ocd_delay #(.T(word_t), .N(T_SH - 1)) u_dl_p    (.clk, .d(g_p),    .q(p_d));
  ocd_delay #(.T(cplx_t), .N(T_SH - 1)) u_dl_z1   (.clk, .d(z_rd),   .q(zold_sh));
  ocd_delay #(.T(cplx_t), .N(2))        u_dl_z2   (.clk, .d(zold_sh), .q(zold_z));

  logic zu_v, zclip;
  ocd_zupdate u_zupd (
    .clk, .rst_n,
    .in_valid (sh_v && !tok[T_SH].pre),
    .hr       (sh_word),
    .d_inv    (dinv_d),
    .p        (p_d),
    .z_old    (zold_sh),
    .box_mode (cfg_box),
    .bpsk     (cfg_bpsk),
    .radius   (cfg_radius),
    .out_valid(zu_v),
    .z_new    (z_new),
    .clipped  (zclip)
  );
  assign zm_we = tok[T_Z].valid && (tok[T_Z].pre || zu_v);

  word_t p_out;
  ocd_delay #(.T(word_t), .N(2)) u_dl_pout (.clk, .d(p_d), .q(p_out));

  assign out_valid = zu_v && tok[T_Z].valid && !tok[T_Z].pre && tok[T_Z].last;
  assign out_sc    = tok[T_Z].sc;
  assign out_user  = tok[T_Z].user;
  assign out_z     = z_new;
  assign out_p     = p_out;

  // ---------------------------------------------- scaling and residual path
  vec_t h_z, r_hdz, hdz;
  ocd_delay #(.T(vec_t), .N(T_Z - 1))   u_dl_h (.clk, .d(h_rd_data), .q(h_z));
  ocd_delay #(.T(vec_t), .N(T_HDZ - 1)) u_dl_r (.clk, .d(r_rd_data), .q(r_hdz));

  logic sc_v;
  ocd_scale #(.B(B)) u_scale (
    .clk, .rst_n,
    .in_valid (zu_v),
    .z_new    (z_new),
    .z_old    (zold_z),
    .h        (h_z),
    .out_valid(sc_v),
    .hdz      (hdz)
  );

  logic ru_v;
  ocd_rupdate #(.B(B)) u_rupd (
    .clk, .rst_n,
    .in_valid (sc_v),
    .r        (r_hdz),
    .hdz      (hdz),
    .out_valid(ru_v),
    .r_new    (r_wr_data)
  );

  assign r_wr_en   = ru_v && tok[WB_LAT].valid && !tok[WB_LAT].pre;
  assign r_wr_addr = tok[WB_LAT].sc;

  // ------------------------------------------------------------ assertions
  // Each unit's own valid must agree with the scheduler token at its stage.
  a_ip_align: assert property (@(posedge clk) disable iff (!rst_n)
    sh_v == tok[T_SH].valid);
  a_z_align: assert property (@(posedge clk) disable iff (!rst_n)
    zu_v == (tok[T_Z].valid && !tok[T_Z].pre));
  a_pre_align: assert property (@(posedge clk) disable iff (!rst_n)
    pp_v == (tok[T_PRE].valid && tok[T_PRE].pre));

endmodule
