// pair_avg: averages the two ADC samples that arrive per clock.
//
// The digitizer delivers each 250 MS/s channel as two samples per 125 MHz
// clock. They are averaged pairwise, giving one sample per clock for the
// filter. The average is the 15-bit sum shifted right by one (rounded toward
// minus infinity) and kept at SAMPLE_W bits, so it never overflows.
//
// Interface: s0, s1 are two's-complement samples; avg is registered.
// Timing: latency one clock, one result per clock.
// The pairwise averaging follows the published implementation; rounding,
// sample coding and the register stage are this design's own choices.
module pair_avg #(
  parameter int unsigned SAMPLE_W = 14
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic signed [SAMPLE_W-1:0] s0,
  input  logic signed [SAMPLE_W-1:0] s1,
  output logic signed [SAMPLE_W-1:0] avg
);

  logic signed [SAMPLE_W:0] sum;

  always_comb sum = {s0[SAMPLE_W-1], s0} + {s1[SAMPLE_W-1], s1};

  always_ff @(posedge clk) begin
    if (rst) avg <= '0;
    else     avg <= sum[SAMPLE_W:1];
  end

endmodule
