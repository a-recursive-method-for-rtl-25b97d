// trigger: threshold trigger with peak search and dead time.
//
// Watches the compressed filter output r. While armed, a sample at or above
// thresh starts an event: the following window of WIN samples (the crossing
// sample included) is searched for its maximum, whose value is reported as
// the event energy and whose clock count as its time. A fixed dead time of
// DEAD clocks, counted from the crossing, follows every trigger, so a pulse
// is not triggered on twice.
//
// Interface: ev is valid for one clock per event; busy is high from the
// crossing until the trigger is armed again. time_stamp counts clocks since
// reset (wraps).
// Timing: a crossing at clock c0 gives ev.valid at clock c0+WIN; the trigger
// is armed again at clock c0+DEAD. The first of equal maxima is kept.
// The threshold, the peak pick-off in a short window and the 5 us dead time
// (625 clocks at 125 MHz) follow the published analysis; the window length
// of 32 clocks and the tie rule are this design's own choices.
module trigger
  import rppf_pkg::*;
#(
  parameter int unsigned WIN  = 32,
  parameter int unsigned DEAD = 625
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [OUT_W-1:0] r,
  input  logic signed [OUT_W-1:0] thresh,
  output trig_event_t             ev,
  output logic                    busy
);

  localparam int unsigned CW = $clog2(DEAD + 1);

  typedef enum logic [1:0] {ARMED, SEARCH, HOLD} state_t;

  state_t                  state;
  logic [CW-1:0]           cnt;      // clocks since the crossing
  logic [TIME_W-1:0]       tnow;
  logic signed [OUT_W-1:0] mx;
  logic [TIME_W-1:0]       tmx;
  logic                    bigger;

  assign bigger = (r > mx);
  assign busy   = (state != ARMED);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= ARMED;
      cnt   <= '0;
      tnow  <= '0;
      mx    <= '0;
      tmx   <= '0;
      ev    <= '0;
    end else begin
      tnow     <= tnow + 1'b1;
      ev.valid <= 1'b0;
      unique case (state)
        ARMED: begin
          if (r >= thresh) begin
            state <= SEARCH;
            mx    <= r;
            tmx   <= tnow;
            cnt   <= CW'(1);
          end
        end
        SEARCH: begin
          cnt <= cnt + 1'b1;
          if (bigger) begin
            mx  <= r;
            tmx <= tnow;
          end
          if (cnt == CW'(WIN - 1)) begin
            state         <= HOLD;
            ev.valid      <= 1'b1;
            ev.energy     <= bigger ? r : mx;
            ev.time_stamp <= bigger ? tnow : tmx;
          end
        end
        HOLD: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(DEAD - 1)) state <= ARMED;
        end
        default: state <= ARMED;
      endcase
    end
  end

  if (WIN < 2 || DEAD <= WIN) begin : g_bad_params
    $error("trigger: need 2 <= WIN < DEAD");
  end

endmodule
