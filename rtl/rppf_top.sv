// rppf_top: multi-channel digitizer front end with recursive piecewise
// polynomial filters.
//
// Every channel receives two ADC samples per clock, averages them
// (pair_avg), filters the stream with a seven-segment recursive piecewise
// polynomial filter (pp_filter) whose kernel approximates, for example, a
// sliding least-squares fit response, and triggers on the filter output
// (trigger). One register file (coef_regs) holds every channel's segment
// lengths, Lambda_k, coefficients c'_k and threshold; it is written over the
// cfg_* bus at run time, and a change of L or Lambda restarts that channel's
// filter.
//
// Interface: adc_s0/adc_s1 are the two samples of each channel per clock;
// r_out is each channel's compressed filter output; ev carries trigger
// events (energy = local maximum of r_out, time_stamp = clock count).
// Timing: one sample pair per channel per clock. r_out(t) is the filter
// response to the averaged samples up to clock t - (K+SEGS+5); an event
// follows its crossing by WIN clocks.
// Eight channels, seven order-4 segments of up to 500 samples and 55-bit
// coefficients follow the published implementation; the bus and the trigger
// window are this design's own.
module rppf_top
  import rppf_pkg::*;
#(
  parameter int unsigned NCH   = rppf_pkg::CHANNELS,
  parameter int unsigned NSEG  = rppf_pkg::SEGS,
  parameter int unsigned L_MAX = rppf_pkg::L_MAX,
  parameter int unsigned WIN   = 32,
  parameter int unsigned DEAD  = 625
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic signed [SAMPLE_W-1:0] adc_s0 [NCH],
  input  logic signed [SAMPLE_W-1:0] adc_s1 [NCH],
  input  logic                       cfg_wr_en,
  input  logic [2:0]                 cfg_wr_chan,
  input  logic [2:0]                 cfg_wr_seg,
  input  logic [3:0]                 cfg_wr_idx,
  input  logic [63:0]                cfg_wr_data,
  output logic signed [OUT_W-1:0]    r_out  [NCH],
  output trig_event_t                ev     [NCH],
  output logic [NCH-1:0]             busy
);

  seg_cfg_t                cfg    [NCH][NSEG];
  logic signed [OUT_W-1:0] thresh [NCH];
  logic [NCH-1:0]          clear;

  coef_regs #(.NCH(NCH), .NSEG(NSEG), .L_MAX(L_MAX)) u_regs (
    .clk, .rst,
    .wr_en   (cfg_wr_en),
    .wr_chan (cfg_wr_chan),
    .wr_seg  (cfg_wr_seg),
    .wr_idx  (cfg_wr_idx),
    .wr_data (cfg_wr_data),
    .cfg, .thresh, .clear
  );

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic signed [SAMPLE_W-1:0] v;

    pair_avg #(.SAMPLE_W(SAMPLE_W)) u_avg (
      .clk, .rst,
      .s0  (adc_s0[c]),
      .s1  (adc_s1[c]),
      .avg (v)
    );

    pp_filter #(.NSEG(NSEG), .L_MAX(L_MAX)) u_filt (
      .clk, .rst,
      .clear  (clear[c]),
      .cfg    (cfg[c]),
      .v_in   (v),
      .r_full (),
      .r_out  (r_out[c])
    );

    trigger #(.WIN(WIN), .DEAD(DEAD)) u_trig (
      .clk, .rst,
      .r      (r_out[c]),
      .thresh (thresh[c]),
      .ev     (ev[c]),
      .busy   (busy[c])
    );
  end

endmodule
