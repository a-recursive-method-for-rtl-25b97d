// pp_filter: recursive piecewise polynomial filter of one channel.
//
// The filter kernel h_t[n] is a sequence of SEGS polynomial pieces of
// lengths L_1..L_SEGS and order up to K. The segments are chained: each hands
// its input, delayed by its own length, to the next, so piece s acts on the
// signal delayed by L_1+...+L_(s-1); and each adds its weighted orders to
// the cumulative output of the pieces before it. The last cumulative output
// is r_t[n] = sum_j h_t[j] v[n-j+1], kept at full precision (SUM_W bits, the
// coefficient fraction included) up to this point. Only then is it
// compressed: the COEF_FRAC fraction bits are dropped (rounding toward minus
// infinity) and the integer is saturated to OUT_W bits.
//
// Interface: cfg[s] configures segment s (s = 0 first). Unused trailing
// segments are given zero coefficients. clear restarts every segment.
// Timing: one sample per clock. Each segment boundary adds one clock to both
// the delayed signal and the cumulative sum, so all pieces stay aligned and
//   r_full(t) = r_t(t - LAT + 1),  r_out(t) = compressed r_t(t - LAT),
// with LAT = K + SEGS + 4 (15 for the default sizes).
// Seven segments of order four, the 500-sample limit and the delayed
// compression follow the published implementation; the output width and the
// rounding and saturation are this design's own choices.
module pp_filter
  import rppf_pkg::*;
#(
  parameter int unsigned NSEG  = rppf_pkg::SEGS,
  parameter int unsigned L_MAX = rppf_pkg::L_MAX
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       clear,
  input  seg_cfg_t                   cfg [NSEG],
  input  logic signed [SAMPLE_W-1:0] v_in,
  output logic signed [SUM_W-1:0]    r_full,
  output logic signed [OUT_W-1:0]    r_out
);

  localparam int unsigned INT_W = SUM_W - COEF_FRAC;

  logic signed [SAMPLE_W-1:0] v_chain [NSEG+1];
  logic signed [SUM_W-1:0]    r_chain [NSEG+1];
  logic signed [INT_W-1:0]    r_int;

  assign v_chain[0] = v_in;
  assign r_chain[0] = '0;

  for (genvar s = 0; s < NSEG; s++) begin : g_seg
    poly_segment #(.L_MAX(L_MAX), .SUM_W(SUM_W)) u_seg (
      .clk, .rst, .clear,
      .cfg   (cfg[s]),
      .v_in  (v_chain[s]),
      .r_in  (r_chain[s]),
      .v_out (v_chain[s+1]),
      .r_out (r_chain[s+1])
    );
  end

  assign r_full = r_chain[NSEG];
  assign r_int  = r_full[SUM_W-1:COEF_FRAC];

  localparam logic signed [INT_W-1:0] OUT_MAX = INT_W'({1'b0, {(OUT_W-1){1'b1}}});
  localparam logic signed [INT_W-1:0] OUT_MIN = -OUT_MAX - 1;

  always_ff @(posedge clk) begin
    if (rst || clear)          r_out <= '0;
    else if (r_int > OUT_MAX)  r_out <= OUT_MAX[OUT_W-1:0];
    else if (r_int < OUT_MIN)  r_out <= OUT_MIN[OUT_W-1:0];
    else                       r_out <= r_int[OUT_W-1:0];
  end

endmodule
