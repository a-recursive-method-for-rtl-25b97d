// rppf_top_tb: end-to-end test of the eight-channel filter front end at its
// default sizes (8 channels, 7 segments of order 4, L up to 500, 55-bit
// coefficients, 32-clock peak window, 625-clock dead time).
//
// All kernels are loaded over the configuration bus: a ramp-up / flat /
// ramp-down trapezoid followed by a negative baseline lobe that removes the
// kernel's area (so a constant offset is rejected), then three short
// segments with small terms of orders 2..4, so every order of every segment
// is used. Channel 0 uses a 500-sample segment. The ADC inputs carry a
// baseline offset, noise, a slow oscillation and tail pulses of random
// height. The reference convolves the pair-averaged input with the kernel
// in 128-bit arithmetic and compresses it; r_out is checked every clock of
// every channel (latency K + SEGS + 5 = 16 clocks), and the trigger events
// are checked against a reference trigger run on the observed r_out.
// Mid-run, channel 1 is given a new segment length (a restart),
// channel 2 new coefficients (no restart), and channel 3 for a while a
// large order-4 term that saturates its output. Each mechanism is counted and
// must occur: restart, coefficient update, saturation, triggers, crossings
// suppressed by the dead time, full-length segment.
module rppf_top_tb;
  import rppf_pkg::*;

  localparam int NCH   = CHANNELS;
  localparam int TL    = K + SEGS + 5;
  localparam int NCYC  = 9000;
  localparam int KMAX  = SEGS * L_MAX + 1;
  localparam int WIN   = 32;
  localparam int DEAD  = 625;

  logic clk = 1'b0;
  logic rst;
  logic signed [SAMPLE_W-1:0] adc_s0 [NCH];
  logic signed [SAMPLE_W-1:0] adc_s1 [NCH];
  logic        cfg_wr_en;
  logic [2:0]  cfg_wr_chan, cfg_wr_seg;
  logic [3:0]  cfg_wr_idx;
  logic [63:0] cfg_wr_data;
  logic signed [OUT_W-1:0] r_out [NCH];
  trig_event_t ev [NCH];
  logic [NCH-1:0] busy;

  rppf_top dut (.clk, .rst, .adc_s0, .adc_s1, .cfg_wr_en, .cfg_wr_chan, .cfg_wr_seg,
                .cfg_wr_idx, .cfg_wr_data, .r_out, .ev, .busy);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int g = 0;                                    // clocks since reset release

  // model state
  logic signed [127:0] ht    [NCH][KMAX];
  int                  klen  [NCH];
  int                  lens  [NCH][SEGS];
  logic signed [127:0] cf    [NCH][SEGS][K+1];
  int                  start [NCH];             // first averaged sample in the history
  int                  vfrom [NCH];             // first clock at which r_out is checked
  int                  ain   [NCH][NCYC];       // pair average of the inputs driven at clock c
  int                  robs  [NCH][NCYC];       // observed r_out
  int                  thr   [NCH];
  int                  thr_from [NCH];
  bit                  evv   [NCH][NCYC];
  int                  eve   [NCH][NCYC];
  int                  evt   [NCH][NCYC];
  bit                  xev   [NCYC];

  int n_restart = 0, n_coef_update = 0, n_sat = 0, n_events = 0, n_suppr = 0, n_full_len = 0;

  initial begin
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [127:0] fx(real x);
    return 128'($rtoi(x * 1048576.0)) <<< (COEF_FRAC - 20);
  endfunction

  function automatic int compress(logic signed [127:0] x);
    logic signed [127:0] q;
    q = x >>> COEF_FRAC;
    if (q > 128'sd2147483647)  return 32'h7fffffff;
    if (q < -128'sd2147483648) return 32'h80000000;
    return int'(q);
  endfunction

  function automatic int floor_avg(int a, int b);
    int s;
    s = a + b;
    return (s >= 0) ? s / 2 : -((-s + 1) / 2);
  endfunction

  function automatic logic signed [127:0] expect_rt(int ch, int t);
    logic signed [127:0] s;
    int idx;
    s = 0;
    for (int j = 1; j <= klen[ch]; j++) begin
      idx = t - TL - j + 1;
      if (idx >= start[ch] - 1 && idx >= 0) s += ht[ch][j] * 128'(ain[ch][idx]);
    end
    return s;
  endfunction

  // Build the kernel of channel ch from lens and cf.
  function automatic void build_kernel(int ch);
    int off;
    off = 0;
    for (int j = 0; j < KMAX; j++) ht[ch][j] = 0;
    for (int s = 0; s < SEGS; s++) begin
      for (int n = 1; n <= lens[ch][s]; n++)
        for (int k = 0; k <= K; k++) ht[ch][off+n] += cf[ch][s][k] * 128'(binom(n + k - 1, k));
      off += lens[ch][s];
    end
    klen[ch] = off;
  endfunction

  // Trapezoid with rise r, flat f, then a baseline lobe of length b, then
  // three short segments with small higher-order terms.
  function automatic void design_kernel(int ch, int r, int f, int b, real gain);
    real area;
    lens[ch] = '{r, f, r, b, 3, 4, 5};
    for (int s = 0; s < SEGS; s++) for (int k = 0; k <= K; k++) cf[ch][s][k] = 0;
    cf[ch][0][1] = fx(gain / r);                        // n/r
    cf[ch][1][0] = fx(gain);                            // 1
    cf[ch][2][0] = fx(gain * (r + 1) / r);              // (r+1-n)/r
    cf[ch][2][1] = -fx(gain / r);
    area = gain * (r + f);
    cf[ch][3][0] = -fx(area / b);                       // baseline lobe
    cf[ch][4][2] = fx(gain / 64.0);
    cf[ch][5][3] = -fx(gain / 512.0);
    cf[ch][6][4] = fx(gain / 4096.0);
  endfunction

  task automatic bus_write(int ch, int sg, int idx, logic [63:0] d);
    cfg_wr_en = 1'b1; cfg_wr_chan = 3'(ch); cfg_wr_seg = 3'(sg); cfg_wr_idx = 4'(idx); cfg_wr_data = d;
  endtask

  // Queue of bus writes, issued one per clock by the main loop.
  typedef struct { int ch; int sg; int idx; logic [63:0] d; } wr_t;
  wr_t wq [$];

  task automatic queue_channel(int ch, bit geometry, bit coefs);
    for (int s = 0; s < SEGS; s++) begin
      if (geometry) begin
        wq.push_back('{ch, s, IDX_LEN, 64'(lens[ch][s])});
        for (int k = 1; k <= K; k++)
          wq.push_back('{ch, s, IDX_LAMBDA + k - 1, 64'(binom(lens[ch][s] + k - 1, k))});
      end
      if (coefs)
        for (int k = 0; k <= K; k++) wq.push_back('{ch, s, IDX_COEF + k, 64'(cf[ch][s][k])});
    end
  endtask

  // ADC stimulus: offset, noise, slow oscillation, tail pulses.
  real phase [NCH];
  real pulse_t0 [NCH];
  real pulse_amp [NCH];

  function automatic int adc_sample(int ch, real t);
    real v, dt;
    v = -125.0 + 150.0 * $sin(phase[ch] + 6.2831853 * t / 3000.0)
        + (real'($urandom_range(0, 60)) - 30.0);
    dt = t - pulse_t0[ch];
    if (dt > 0.0) v += pulse_amp[ch] * ($exp(-dt / 600.0) - $exp(-dt / 30.0));
    if (v > 8191.0) v = 8191.0;
    if (v < -8192.0) v = -8192.0;
    return $rtoi(v);
  endfunction

  initial begin
    int a, b, e;
    int armed_at [NCH];
    int m, tm;
    int pending_ch;

    rst = 1'b1; cfg_wr_en = 1'b0; cfg_wr_chan = '0; cfg_wr_seg = '0; cfg_wr_idx = '0; cfg_wr_data = '0;
    for (int c = 0; c < NCH; c++) begin
      adc_s0[c] = '0; adc_s1[c] = '0;
      phase[c] = real'(c);
      pulse_t0[c] = 1.0e9;
      pulse_amp[c] = 0.0;
      start[c] = 0;
      thr[c] = 32'h7fffffff;
      thr_from[c] = 0;
      armed_at[c] = 0;
    end
    // kernels: channel 0 has a 500-sample baseline lobe
    for (int c = 0; c < NCH; c++) begin
      design_kernel(c, 20 + 5 * c, 10 + c, (c == 0) ? L_MAX : 100 + 10 * c, 1.0 / 16.0);
      build_kernel(c);
      queue_channel(c, 1, 1);
      wq.push_back('{c, 0, IDX_THRESH, 64'(3000)});
    end
    for (int c = 0; c < NCH; c++) for (int s = 0; s < SEGS; s++) if (lens[c][s] == L_MAX) n_full_len++;
    // the channel is checked once its last write has settled
    for (int c = 0; c < NCH; c++) vfrom[c] = wq.size() + 2;

    repeat (3) @(negedge clk);
    rst = 1'b0;
    pending_ch = -1;

    for (g = 0; g < NCYC; g++) begin
      // ---- check outputs of clock g ----
      for (int c = 0; c < NCH; c++) begin
        robs[c][g] = r_out[c];
        evv[c][g] = ev[c].valid;
        eve[c][g] = ev[c].energy;
        evt[c][g] = int'(ev[c].time_stamp);
        if (g >= vfrom[c]) begin
          e = compress(expect_rt(c, g));
          checks++;
          if (r_out[c] !== e) begin
            failures++;
            if (failures < 10) $display("g=%0d ch=%0d r_out=%0d exp=%0d", g, c, r_out[c], e);
          end
          if (e == 32'h7fffffff || e == 32'h80000000) n_sat++;
        end
      end
      // ---- drive clock g ----
      cfg_wr_en = 1'b0;
      if (wq.size() > 0) begin
        wr_t w;
        w = wq.pop_front();
        bus_write(w.ch, w.sg, w.idx, w.d);
        if (w.idx == IDX_LEN || (w.idx >= IDX_LAMBDA && w.idx < IDX_COEF)) start[w.ch] = g + 2;
        if (w.idx == IDX_THRESH) begin thr[w.ch] = int'(w.d); thr_from[w.ch] = g + 1; end
      end
      // mid-run reconfiguration
      if (g == 4000) begin
        // channel 1: new geometry, history restarts
        design_kernel(1, 33, 7, 250, 1.0 / 16.0);
        build_kernel(1);
        queue_channel(1, 1, 1);
        vfrom[1] = g + wq.size() + 2;
        n_restart++;
        // channel 2: gain doubled, coefficients only, no restart
        for (int s = 0; s < SEGS; s++) for (int k = 0; k <= K; k++) cf[2][s][k] = cf[2][s][k] * 2;
        pending_ch = 2;
      end
      if (g == 4200 && pending_ch == 2) begin
        build_kernel(2);
        queue_channel(2, 0, 1);
        vfrom[2] = g + wq.size() + TL + 4;
        n_coef_update++;
        pending_ch = -1;
      end
      // channel 3: a large order-4 term on its baseline lobe drives the
      // output into saturation, then is removed again (coefficient writes only)
      if (g == 6000 || g == 7000) begin
        cf[3][3][4] = (g == 6000) ? fx(1.0) : 0;
        build_kernel(3);
        wq.push_back('{3, 3, IDX_COEF + 4, 64'(cf[3][3][4])});
        vfrom[3] = g + wq.size() + TL + 4;
      end
      // pulses
      for (int c = 0; c < NCH; c++) begin
        if (g > 800 && (g % 700) == (37 * c) % 700) begin
          pulse_t0[c] = 2.0 * real'(g);
          pulse_amp[c] = real'($urandom_range(200, 5000));
        end
        a = adc_sample(c, 2.0 * g);
        b = adc_sample(c, 2.0 * g + 1.0);
        adc_s0[c] = SAMPLE_W'(a);
        adc_s1[c] = SAMPLE_W'(b);
        ain[c][g] = floor_avg(a, b);
      end
      @(negedge clk);
    end
    cfg_wr_en = 1'b0;

    // ---- trigger reference on the observed filter output ----
    for (int c = 0; c < NCH; c++) begin
      int nev;
      nev = 0;
      for (int i = 0; i < NCYC; i++) xev[i] = 1'b0;
      for (int i = 0; i < NCYC; i++) begin
        bit xing;
        xing = (i >= thr_from[c]) && (robs[c][i] >= thr[c]);
        if (xing && i >= armed_at[c]) begin
          m = robs[c][i]; tm = i;
          for (int j = 1; j < WIN; j++)
            if (i + j < NCYC && robs[c][i+j] > m) begin m = robs[c][i+j]; tm = i + j; end
          armed_at[c] = i + DEAD;
          nev++;
          if (i + WIN < NCYC) begin
            xev[i+WIN] = 1'b1;
            checks++;
            if (eve[c][i+WIN] != m || evt[c][i+WIN] != tm) begin
              failures++;
              if (failures < 10) $display("ch=%0d event at %0d: dut %0d %0d, exp %0d %0d",
                                          c, i + WIN, eve[c][i+WIN], evt[c][i+WIN], m, tm);
            end
          end
        end else if (xing && i > 0 && robs[c][i-1] < thr[c]) begin
          n_suppr++;
        end
      end
      // event strobes exactly where expected
      for (int i = 0; i < NCYC; i++) begin
        checks++;
        if (evv[c][i] != xev[i]) begin
          failures++;
          if (failures < 10) $display("ch=%0d clock %0d: event strobe %0b expected %0b", c, i, evv[c][i], xev[i]);
        end
        n_events += int'(evv[c][i]);
      end
      checks++;
      if (nev == 0) begin
        failures++;
        $display("channel %0d never triggered", c);
      end
    end
    $display("events=%0d dead-time-suppressed=%0d saturated=%0d restarts=%0d coef-updates=%0d full-length-segments=%0d",
             n_events, n_suppr, n_sat, n_restart, n_coef_update, n_full_len);
    if (n_events == 0)      begin failures++; $display("no trigger event"); end
    if (n_suppr == 0)       begin failures++; $display("dead time never suppressed a crossing"); end
    if (n_sat == 0)         begin failures++; $display("output never saturated"); end
    if (n_restart == 0)     begin failures++; $display("no restart"); end
    if (n_coef_update == 0) begin failures++; $display("no coefficient update"); end
    if (n_full_len == 0)    begin failures++; $display("no full-length segment"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
