// ocd_ctrl: operation scheduler of the OCD detector.
//
// A batch covers S subcarriers that are processed interleaved: every cycle one
// (subcarrier, user) operation enters the pipeline, with the subcarrier index
// as the innermost loop, so consecutive operations of the same subcarrier are
// S cycles apart and the feedback loop through the residual r can be up to S
// cycles deep. The order is
//   preprocessing:  for u in 0..U-1, for s in 0..S-1          (U*S cycles)
//   equalization:   for k in 1..K, for u in 0..U-1, for s ...  (K*U*S cycles)
// followed by DRAIN idle cycles while the pipeline empties, after which done
// pulses for one cycle. From the cycle start is sampled to the cycle done is
// high this takes S*(K+1)*U + DRAIN + 1 cycles.
//
// Interface: start (one cycle) latches num_users (U, 1..UMAX) and num_iter
// (K, 1..KMAX); a value of 0 is treated as 1 and larger values as the maximum
// (this design's choice). start is ignored while busy. tok is the operation
// issued in the current cycle (valid, preprocessing flag, last-iteration
// flag, subcarrier, user), driven from registers.
module ocd_ctrl
  import ocd_pkg::*;
#(
  parameter int unsigned S     = 24,
  parameter int unsigned UMAX  = 32,
  parameter int unsigned KMAX  = 256,
  parameter int unsigned DRAIN = 15
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(UMAX+1)-1:0] num_users,
  input  logic [$clog2(KMAX+1)-1:0] num_iter,
  output tok_t                      tok,
  output logic                      busy,
  output logic                      done
);
  localparam int unsigned UW = $clog2(UMAX+1);
  localparam int unsigned KW = $clog2(KMAX+1);
  localparam int unsigned DW = $clog2(DRAIN+2);

  typedef enum logic [1:0] {IDLE, PRE, EQ, FLUSH} state_t;

  state_t          state;
  logic [SC_W-1:0] sc;
  logic [USER_W-1:0] user;
  logic [KW-1:0]   iter;       // 0-based equalization iteration
  logic [UW-1:0]   u_cfg;
  logic [KW-1:0]   k_cfg;
  logic [DW-1:0]   cnt;

  wire sc_wrap   = (32'(sc) == S - 1);
  wire user_wrap = sc_wrap && (32'(user) + 1 == 32'(u_cfg));
  wire iter_wrap = user_wrap && (32'(iter) + 1 == 32'(k_cfg));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE;
      sc    <= '0;
      user  <= '0;
      iter  <= '0;
      u_cfg <= UW'(1);
      k_cfg <= KW'(1);
      cnt   <= '0;
    end else begin
      unique case (state)
        IDLE: if (start) begin
          state <= PRE;
          sc    <= '0;
          user  <= '0;
          iter  <= '0;
          u_cfg <= (num_users == 0) ? UW'(1) : (32'(num_users) > UMAX) ? UW'(UMAX) : num_users;
          k_cfg <= (num_iter  == 0) ? KW'(1) : (32'(num_iter)  > KMAX) ? KW'(KMAX) : num_iter;
        end
        PRE, EQ: begin
          sc <= sc_wrap ? '0 : sc + 1'b1;
          if (sc_wrap) user <= user_wrap ? '0 : user + 1'b1;
          if (state == PRE && user_wrap) begin
            state <= EQ;
          end else if (state == EQ && user_wrap) begin
            iter <= iter + 1'b1;
            if (iter_wrap) begin
              state <= FLUSH;
              cnt   <= DW'(DRAIN);
            end
          end
        end
        FLUSH: begin
          if (cnt == 0) state <= IDLE;
          else          cnt   <= cnt - 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  always_comb begin
    tok.valid = (state == PRE) || (state == EQ);
    tok.pre   = (state == PRE);
    tok.last  = (state == EQ) && (32'(iter) + 1 == 32'(k_cfg));
    tok.sc    = sc;
    tok.user  = user;
  end

  assign busy = (state != IDLE);
  assign done = (state == FLUSH) && (cnt == 0);

  // The interleaving depth and user count must fit the token's index widths.
  if (S > (1 << SC_W) || UMAX > (1 << USER_W)) begin : g_bad_size
    $error("ocd_ctrl: S or UMAX exceeds the token index width");
  end

endmodule
