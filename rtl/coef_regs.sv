// coef_regs: run-time configuration registers of all channels.
//
// The filter is reconfigured without rebuilding the logic: a host writes,
// for every channel and segment, the length L, the truncation constants
// Lambda_1..Lambda_K and the coefficients c'_0..c'_K, plus one trigger
// threshold per channel. Writes go over a simple synchronous bus, one
// register per clock:
//   wr_idx 0          L (1..L_MAX; other values are ignored)
//   wr_idx 1..K       Lambda_k, unsigned
//   wr_idx K+1..2K+1  c'_(idx-K-1), signed, COEF_FRAC fraction bits
//   wr_idx 15         threshold (wr_seg ignored), signed
// The value is right-aligned in wr_data and truncated to the field width.
// The recursion only cancels if L and Lambda have been constant over the
// whole history held in the filter, so a write to L or Lambda pulses the
// channel's clear output one clock later. Coefficient writes need no restart.
//
// Timing: a write is visible on cfg / thresh in the next clock.
// Reset values: L = 1, Lambda = 0, c' = 0 (output zero), threshold at its
// maximum (no triggers).
// Run-time loading of c'_k and Lambda_k follows the published implementation;
// the bus, its address map and the automatic restart are this design's own.
module coef_regs
  import rppf_pkg::*;
#(
  parameter int unsigned NCH   = rppf_pkg::CHANNELS,
  parameter int unsigned NSEG  = rppf_pkg::SEGS,
  parameter int unsigned L_MAX = rppf_pkg::L_MAX
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    wr_en,
  input  logic [2:0]              wr_chan,
  input  logic [2:0]              wr_seg,
  input  logic [3:0]              wr_idx,
  input  logic [63:0]             wr_data,
  output seg_cfg_t                cfg    [NCH][NSEG],
  output logic signed [OUT_W-1:0] thresh [NCH],
  output logic [NCH-1:0]          clear
);

  logic hit_chan, hit_seg, len_ok;

  always_comb begin
    hit_chan = ({29'd0, wr_chan} < NCH);
    hit_seg  = ({29'd0, wr_seg} < NSEG);
    len_ok   = (wr_data >= 64'd1) && (wr_data <= 64'(L_MAX));
  end

  // One register group per channel and segment, written when addressed.
  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic                    sel_ch;
    logic signed [OUT_W-1:0] th_q;
    logic                    clr_q;

    assign sel_ch = wr_en && ({29'd0, wr_chan} == c);

    always_ff @(posedge clk) begin
      if (rst) begin
        th_q  <= {1'b0, {(OUT_W-1){1'b1}}};
        clr_q <= 1'b0;
      end else begin
        if (sel_ch && wr_idx == 4'(IDX_THRESH)) th_q <= wr_data[OUT_W-1:0];
        // L or Lambda of this channel written: restart its filter.
        clr_q <= sel_ch && hit_seg &&
                 ((wr_idx == 4'(IDX_LEN) && len_ok) ||
                  (wr_idx >= 4'(IDX_LAMBDA) && wr_idx < 4'(IDX_COEF)));
      end
    end

    assign thresh[c] = th_q;
    assign clear[c]  = clr_q;

    for (genvar s = 0; s < NSEG; s++) begin : g_seg
      logic     sel;
      seg_cfg_t q;

      assign sel = sel_ch && ({29'd0, wr_seg} == s);

      always_ff @(posedge clk) begin
        if (rst) begin
          q     <= '0;
          q.len <= LEN_W'(1);
        end else if (sel) begin
          if (wr_idx == 4'(IDX_LEN) && len_ok) q.len <= wr_data[LEN_W-1:0];
          for (int k = 1; k <= K; k++)
            if (wr_idx == 4'(IDX_LAMBDA + k - 1)) q.lambda[k] <= wr_data[LAMBDA_W-1:0];
          for (int k = 0; k <= K; k++)
            if (wr_idx == 4'(IDX_COEF + k)) q.coef[k] <= wr_data[COEF_W-1:0];
        end
      end

      assign cfg[c][s] = q;
    end
  end

  // Bus rule: a segment length written must lie in 1..L_MAX.
  a_len_write: assert property (@(posedge clk) disable iff (rst)
                                (wr_en && hit_chan && hit_seg && wr_idx == 4'(IDX_LEN)) |-> len_ok)
    else $error("coef_regs: length %0d outside 1..%0d ignored", wr_data, L_MAX);

endmodule
