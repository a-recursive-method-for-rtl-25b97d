// poly_segment_tb: self-checking test of one filter segment at full size
// (L_MAX = 500, order 4, 55-bit coefficients).
//
// For several lengths L (1, 7, 37, 500) the segment is configured with
// Lambda_k = C(L+k-1, k) and random signed coefficients, restarted with
// clear, and driven with random samples and a random cumulative input r_in.
// Every clock the outputs are compared with a direct convolution computed in
// 128-bit arithmetic:
//   r_out(t) = r_in(t-1) + sum_k c'_k sum_{n=1..L} C(n+k-1,k) v(t-8-n+1)
//   v_out(t) = v(t-1-L)
// which also checks the latency of K+4 = 8 clocks and the throughput of one
// sample per clock. One phase holds the input at the most negative sample
// for more than L clocks with L = 500, the case that sets the accumulator
// width.
module poly_segment_tb;
  import rppf_pkg::*;

  localparam int LAT  = K + 4;
  localparam int HMAX = 4096;

  logic clk = 1'b0;
  logic rst, clear;
  seg_cfg_t cfg;
  logic signed [SAMPLE_W-1:0] v_in, v_out;
  logic signed [SUM_W-1:0]    r_in, r_out;

  poly_segment dut (.clk, .rst, .clear, .cfg, .v_in, .r_in, .v_out, .r_out);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic signed [SAMPLE_W-1:0] vh [HMAX];
  logic signed [SUM_W-1:0]    rh [HMAX];
  logic signed [127:0]        cf [K+1];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [SAMPLE_W-1:0] vget(int c);
    return (c < 0) ? '0 : vh[c];
  endfunction

  function automatic logic signed [127:0] conv(int m, int len);
    logic signed [127:0] s, rk;
    s = 0;
    for (int k = 0; k <= K; k++) begin
      rk = 0;
      for (int n = 1; n <= len; n++)
        rk += 128'(binom(n + k - 1, k)) * 128'(vget(m - n + 1));
      s += cf[k] * rk;
    end
    return s;
  endfunction

  // mode 0: random samples, 1: constant most negative sample
  task automatic run_cfg(int len, int ncyc, int mode);
    logic signed [127:0] exp_r;
    logic signed [SAMPLE_W-1:0] exp_v;
    cfg.len = LEN_W'(len);
    for (int k = 1; k <= K; k++) cfg.lambda[k] = LAMBDA_W'(binom(len + k - 1, k));
    for (int k = 0; k <= K; k++) begin
      cfg.coef[k] = COEF_W'({$urandom, $urandom});
      cf[k] = 128'($signed(cfg.coef[k]));
    end
    @(negedge clk);
    clear = 1'b1;
    v_in = SAMPLE_W'($urandom);
    r_in = SUM_W'({$urandom, $urandom, $urandom, $urandom});
    @(negedge clk);
    clear = 1'b0;
    for (int c = 0; c < ncyc; c++) begin
      if (c > 0) begin
        exp_r = ((c >= 1) ? 128'(rh[c-1]) : 128'(0)) + conv(c - LAT, len);
        exp_v = vget(c - 1 - len);
        checks += 2;
        if (r_out !== SUM_W'(exp_r)) begin
          failures++;
          if (failures < 10) $display("L=%0d c=%0d r_out=%0h exp=%0h", len, c, r_out, SUM_W'(exp_r));
        end
        if (v_out !== exp_v) begin
          failures++;
          if (failures < 10) $display("L=%0d c=%0d v_out=%0d exp=%0d", len, c, v_out, exp_v);
        end
      end
      vh[c] = (mode == 1) ? SAMPLE_W'(1 << (SAMPLE_W - 1)) : SAMPLE_W'($urandom);
      rh[c] = SUM_W'({$urandom, $urandom, $urandom, $urandom}) >>> 10;
      v_in = vh[c];
      r_in = rh[c];
      @(negedge clk);
    end
  endtask

  initial begin
    rst = 1'b1; clear = 1'b0; v_in = '0; r_in = '0; cfg = '0; cfg.len = 1;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    run_cfg(1, 60, 0);
    run_cfg(7, 80, 0);
    run_cfg(37, 150, 0);
    run_cfg(500, 1100, 0);
    run_cfg(500, 560, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
