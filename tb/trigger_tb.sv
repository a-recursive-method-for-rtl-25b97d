// trigger_tb: drives the trigger with a noisy baseline and pulses of random
// height, width and spacing, some closer together than the dead time, and
// compares every clock with a reference of the rule: while armed, a sample
// >= threshold at clock c0 opens a window of WIN samples; the first maximum
// in it and its clock are reported at clock c0+WIN; the trigger re-arms at
// clock c0+DEAD. Default sizes (WIN = 32, DEAD = 625).
module trigger_tb;
  import rppf_pkg::*;

  localparam int WIN  = 32;
  localparam int DEAD = 625;
  localparam int N    = 20000;

  logic clk = 1'b0;
  logic rst;
  logic signed [OUT_W-1:0] r, thresh;
  trig_event_t ev;
  logic busy;

  trigger dut (.clk, .rst, .r, .thresh, .ev, .busy);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int rv [N];
  bit e_valid [N + WIN + 1];
  int e_energy [N + WIN + 1];
  int e_time [N + WIN + 1];
  int n_events = 0, n_suppressed = 0;

  initial begin
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int th, t, c0, m, tm, amp, wid, pk;
    int armed_at;
    th = 300;
    // stimulus: baseline noise plus triangular pulses
    for (int i = 0; i < N; i++) rv[i] = int'($urandom_range(0, 200)) - 100;
    t = 50;
    while (t < N - 200) begin
      amp = int'($urandom_range(100, 5000));
      wid = int'($urandom_range(2, 60));
      pk  = int'($urandom_range(0, wid));
      for (int j = 0; j <= wid; j++)
        if (t + j < N)
          rv[t+j] += (j <= pk) ? amp * (j + 1) / (pk + 1) : amp * (wid - j + 1) / (wid - pk + 1);
      t += int'($urandom_range(100, 1500));
    end
    rv[N-100] = th;   // exactly at threshold
    // reference
    for (int i = 0; i < N + WIN + 1; i++) e_valid[i] = 0;
    armed_at = 0;
    for (int i = 0; i < N; i++) begin
      if (i >= armed_at && rv[i] >= th) begin
        m = rv[i]; tm = i;
        for (int j = 1; j < WIN; j++)
          if (i + j < N && rv[i+j] > m) begin m = rv[i+j]; tm = i + j; end
        e_valid[i+WIN] = 1; e_energy[i+WIN] = m; e_time[i+WIN] = tm;
        armed_at = i + DEAD;
        n_events++;
      end else if (i < armed_at && rv[i] >= th && (i == 0 || rv[i-1] < th)) begin
        n_suppressed++;
      end
    end

    rst = 1'b1; r = '0; thresh = OUT_W'(th);
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int c = 0; c < N + WIN; c++) begin
      r = (c < N) ? OUT_W'(rv[c]) : '0;
      if (c > 0) begin
        checks++;
        if (ev.valid !== e_valid[c] ||
            (e_valid[c] && (ev.energy !== OUT_W'(e_energy[c]) || ev.time_stamp !== TIME_W'(e_time[c])))) begin
          failures++;
          if (failures < 10)
            $display("c=%0d valid=%0b/%0b energy=%0d/%0d time=%0d/%0d", c, ev.valid, e_valid[c],
                     ev.energy, e_energy[c], ev.time_stamp, e_time[c]);
        end
      end
      @(negedge clk);
    end
    $display("events=%0d crossings suppressed by dead time=%0d", n_events, n_suppressed);
    if (n_events < 5 || n_suppressed == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
