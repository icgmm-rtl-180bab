// gmm_pe: the GMM processing element of the cache policy engine.
//
// It computes the score G(x) = sum_k pi_k N(x | mu_k, Sigma_k) of a 2D Gaussian
// mixture for one input x = (P, T): P is the page index of a request, T its window
// timestamp. Higher scores predict more frequent future access to the page.
//
// How it works: the Gaussians are independent, so they stream through one deep
// pipeline at one Gaussian per cycle (initiation interval 1):
//   issue  read Gaussian k from the weight buffer
//   S1     dp = P - mu_p, dt = T - mu_t
//   S2     dp*dp, dp*dt, dt*dt
//   S3     exponent e = a*dp^2 + b*dp*dt + c*dt^2 + l   (base 2, Q8.8, >= 0)
//   S4     term = 2^-e = EXP2_TAB[frac(e)] >> int(e)  (Q8.24)
//   S5     accumulate
// The pre-folded coefficients a, b, c, l are described in icgmm_pkg::gauss_t; with
// them the Gaussian of Eq. (1) times its weight pi_k is exactly 2^-e, so one
// shift and a 256-entry table replace exp(). Accumulation is a loop-carried
// dependency; as in the source design it is broken with a shift register of
// ACC_DEPTH partial sums (each takes every ACC_DEPTH-th term), and the partial
// sums are added once all NUM_G terms are in.
//
// Interface: in_valid/in_ready accepts (in_p, in_t) when idle; out_valid/out_ready
// returns the score. Latency from the accepting cycle to out_valid is
// NUM_G + 7 cycles (263 at the default 256 Gaussians, 1.13 us at 233 MHz).
// The pipeline, II=1 and the shift-register accumulation follow the paper; the
// base-2 folding, the fixed-point formats and the stage split are this design's.
module gmm_pe
  import icgmm_pkg::*;
#(
  parameter int unsigned NUM_G     = NUM_GAUSS,
  parameter int unsigned ACC_DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [PI_W-1:0]          in_p,
  input  logic [TS_W-1:0]          in_t,
  output logic                     out_valid,
  input  logic                     out_ready,
  output score_t                   out_score,
  // weight buffer read port (one-cycle latency)
  output logic                     wb_rd_en,
  output logic [$clog2(NUM_G)-1:0] wb_rd_addr,
  input  gauss_t                   wb_rd_data
);
  localparam int unsigned GW   = $clog2(NUM_G);
  localparam int unsigned DP_W = PI_W + 1;
  localparam int unsigned DT_W = TS_W + 1;
  localparam int unsigned PP_W = 2 * DP_W;
  localparam int unsigned PT_W = DP_W + DT_W;
  localparam int unsigned TT_W = 2 * DT_W;
  localparam int unsigned Q_W  = COEF_W + PP_W + 2;
  localparam int unsigned SH   = COEF_FRAC - EXP_FRAC;
  localparam int unsigned ACC_W = SCORE_W + 1;

  // 2^(-i/256) in Q.SCORE_FRAC, i = 0..255
  typedef logic [SCORE_W-1:0] tab_t [256];
  function automatic tab_t gen_exp2_tab();
    tab_t t;
    for (int i = 0; i < 256; i++)
      t[i] = SCORE_W'($rtoi(2.0 ** (-real'(i) / 256.0) * real'(64'd1 << SCORE_FRAC) + 0.5));
    return t;
  endfunction
  localparam tab_t EXP2_TAB = gen_exp2_tab();

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_REDUCE, S_OUT} state_e;
  state_e state;

  logic [PI_W-1:0] p_q;
  logic [TS_W-1:0] t_q;
  logic [GW:0]     issue_cnt, acc_cnt;

  // pipeline registers
  logic v0, v1, v2, v3, v4;
  logic signed [DP_W-1:0]   dp1;
  logic signed [DT_W-1:0]   dt1;
  logic signed [COEF_W-1:0] a1, b1, c1, a2, b2, c2;
  logic [EXP_W-1:0]         l1, l2;
  logic signed [PP_W-1:0]   pp2;
  logic signed [PT_W-1:0]   pt2;
  logic signed [TT_W-1:0]   tt2;
  logic [EXP_W-1:0]         e3;
  score_t                   term4;
  logic [ACC_W-1:0]         sr [ACC_DEPTH];

  assign in_ready   = (state == S_IDLE);
  assign wb_rd_en   = (state == S_RUN) && (issue_cnt < (GW+1)'(NUM_G));
  assign wb_rd_addr = issue_cnt[GW-1:0];
  assign out_valid  = (state == S_OUT);

  // S3 combinational: quadratic form and exponent with saturation
  logic signed [Q_W-1:0] q3;
  logic signed [Q_W-1:0] qs3;
  logic [Q_W-1:0]        esum3;
  always_comb begin
    q3    = Q_W'(a2 * pp2) + Q_W'(b2 * pt2) + Q_W'(c2 * tt2);
    qs3   = (q3 < 0) ? '0 : (q3 >>> SH);
    esum3 = Q_W'(qs3) + Q_W'(l2);
  end

  // S4 combinational: 2^-e
  logic [EXP_W-EXP_FRAC-1:0] eint;
  logic [EXP_FRAC-1:0]       efrac;
  assign eint  = e3[EXP_W-1:EXP_FRAC];
  assign efrac = e3[EXP_FRAC-1:0];

  // reduction of the partial sums, saturated to the score width
  logic [ACC_W+$clog2(ACC_DEPTH+1)-1:0] red;
  always_comb begin
    red = '0;
    for (int i = 0; i < ACC_DEPTH; i++) red = red + $bits(red)'(sr[i]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      issue_cnt <= '0;
      acc_cnt <= '0;
      v0 <= 1'b0; v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0; v4 <= 1'b0;
      out_score <= '0;
      p_q <= '0;
      t_q <= '0;
      for (int i = 0; i < ACC_DEPTH; i++) sr[i] <= '0;
    end else begin
      // pipeline valid chain
      v0 <= wb_rd_en;
      v1 <= v0;
      v2 <= v1;
      v3 <= v2;
      v4 <= v3;

      case (state)
        S_IDLE: if (in_valid) begin
          p_q <= in_p;
          t_q <= in_t;
          issue_cnt <= '0;
          acc_cnt <= '0;
          for (int i = 0; i < ACC_DEPTH; i++) sr[i] <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (wb_rd_en) issue_cnt <= issue_cnt + 1'b1;
          if (v4) begin
            // shift-register accumulation
            sr[0] <= sr[ACC_DEPTH-1] + ACC_W'(term4);
            for (int i = 1; i < ACC_DEPTH; i++) sr[i] <= sr[i-1];
            acc_cnt <= acc_cnt + 1'b1;
            if (acc_cnt == (GW+1)'(NUM_G - 1)) state <= S_REDUCE;
          end
        end
        S_REDUCE: begin
          out_score <= (red > $bits(red)'({SCORE_W{1'b1}})) ? {SCORE_W{1'b1}} : SCORE_W'(red);
          state <= S_OUT;
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // datapath registers (no reset needed: qualified by the valid chain)
  always_ff @(posedge clk) begin
    // S1
    dp1 <= $signed({1'b0, p_q}) - $signed({1'b0, wb_rd_data.mu_p});
    dt1 <= $signed({1'b0, t_q}) - $signed({1'b0, wb_rd_data.mu_t});
    a1 <= wb_rd_data.a;  b1 <= wb_rd_data.b;  c1 <= wb_rd_data.c;  l1 <= wb_rd_data.l;
    // S2
    pp2 <= dp1 * dp1;
    pt2 <= dp1 * dt1;
    tt2 <= dt1 * dt1;
    a2 <= a1;  b2 <= b1;  c2 <= c1;  l2 <= l1;
    // S3
    e3 <= (esum3 > Q_W'({EXP_W{1'b1}})) ? {EXP_W{1'b1}} : EXP_W'(esum3);
    // S4
    term4 <= (eint > (EXP_W-EXP_FRAC)'(SCORE_FRAC)) ? '0 : (EXP2_TAB[efrac] >> eint);
  end
endmodule
