// poly_segment: one segment of the recursive piecewise polynomial filter.
//
// The segment convolves its input v[n] with one polynomial piece of the
// kernel, h[n] = sum_{k=0..K} c'_k h^k_L[n] for 1 <= n <= L, where
// h^k_L[n] = C(n+k-1, k) are the diagonals of Pascal's triangle. It needs no
// tap multipliers: K+1 cascaded accumulators implement the recursion
//   r^k[n] = r^k[n-1] + r^(k-1)[n] - Lambda_k v[n-L],  r^(-1)[n] = v[n],
// with Lambda_0 = 1 and Lambda_k = C(L+k-1, k), which truncates each
// response to exactly L samples. The orders are then weighted by c'_k and
// added to r_in, the cumulative output of the preceding segments, and the
// delayed signal v[n-L] is passed on to the next segment.
//
// Pipelining (this design's own): the input is registered once and the
// delay line adds one register, so the segment works on x[n] = v_in[n-1]
// and x[n-L]. Each accumulator is a register, so order k lags order k-1 by
// one clock; the product Lambda_k x[n-L] is delayed by k clocks to meet it.
// Order k is then delayed by K-k clocks so that all orders line up, the
// products c'_k r^k are registered, and the sum with r_in is registered.
// Accumulators wrap modulo 2^ACC_W; this is exact because every truncated
// response r^k_L fits ACC_W bits (ACC_W is sized for L_MAX and K).
//
// Interface: cfg holds len (1..L_MAX), Lambda_1..Lambda_K (unsigned) and
// c'_0..c'_K (signed, COEF_FRAC fraction bits). clear restarts the recursion
// from a zero history; it must be given whenever len or Lambda change.
// Timing: r_out(t) = r_in(t-1) + sum_n' h[n'] v_in(t-(K+4)-n'+1);
// v_out(t) = v_in(t-1-len). One sample per clock.
// The recursion, the order-K structure and the 55-bit coefficients follow the
// published design; widths of Lambda and accumulators and the pipeline are
// this design's own.
module poly_segment
  import rppf_pkg::*;
#(
  parameter int unsigned L_MAX = rppf_pkg::L_MAX,
  parameter int unsigned SUM_W = rppf_pkg::SUM_W
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       clear,
  input  seg_cfg_t                   cfg,
  input  logic signed [SAMPLE_W-1:0] v_in,
  input  logic signed [SUM_W-1:0]    r_in,
  output logic signed [SAMPLE_W-1:0] v_out,
  output logic signed [SUM_W-1:0]    r_out
);

  localparam int unsigned ACC_W  = acc_width(SAMPLE_W, L_MAX, K);
  localparam int unsigned PROD_W = ACC_W + COEF_W;

  typedef logic signed [ACC_W-1:0] acc_t;

  logic signed [SAMPLE_W-1:0] x;             // v_in delayed one clock
  logic signed [SAMPLE_W-1:0] xd;            // x delayed len clocks
  logic signed [SAMPLE_W-1:0] xd_pipe [K];   // xd_pipe[j] = xd delayed j clocks
  acc_t                       lam_p   [K+1]; // lam_p[k] = Lambda_k * xd delayed k clocks
  acc_t                       acc     [K+1]; // acc[k] = r^k, k clocks behind r^0
  acc_t                       align   [K+1][K+1];
  logic signed [PROD_W-1:0]   prod    [K+1];
  logic signed [SUM_W-1:0]    own;

  delay_line #(.L_MAX(L_MAX), .W(SAMPLE_W), .LEN_W(LEN_W)) u_delay (
    .clk, .rst, .clear,
    .len  (cfg.len),
    .din  (v_in),
    .dout (xd)
  );

  assign v_out = xd;

  always_comb begin
    xd_pipe[0] = xd;
    align[0][0] = acc[0];
    for (int k = 1; k <= K; k++) align[k][0] = acc[k];
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      x <= '0;
      for (int j = 1; j < K; j++) xd_pipe[j] <= '0;
      for (int k = 0; k <= K; k++) begin
        lam_p[k] <= '0;
        acc[k]   <= '0;
        prod[k]  <= '0;
        for (int j = 1; j <= K; j++) align[k][j] <= '0;
      end
      r_out <= '0;
    end else begin
      x <= v_in;
      for (int j = 1; j < K; j++) xd_pipe[j] <= xd_pipe[j-1];
      lam_p[0] <= '0;
      for (int k = 1; k <= K; k++)
        lam_p[k] <= acc_t'($signed({1'b0, cfg.lambda[k]})) * acc_t'(xd_pipe[k-1]);
      // Order 0: Lambda_0 = 1.
      acc[0] <= acc[0] + acc_t'(x) - acc_t'(xd);
      for (int k = 1; k <= K; k++)
        acc[k] <= acc[k] + acc[k-1] - lam_p[k];
      // Align order k with order K.
      for (int k = 0; k <= K; k++)
        for (int j = 1; j <= K; j++) align[k][j] <= align[k][j-1];
      for (int k = 0; k <= K; k++)
        prod[k] <= PROD_W'($signed(cfg.coef[k])) * PROD_W'(align[k][K-k]);
      r_out <= r_in + own;
    end
  end

  always_comb begin
    own = '0;
    for (int k = 0; k <= K; k++) own = own + SUM_W'(prod[k]);
  end

endmodule
