// pp_filter_tb: self-checking test of the seven-segment filter at its
// default sizes.
//
// Each test draws segment lengths and coefficients, loads Lambda_k =
// C(L+k-1, k), restarts the filter with clear and feeds random samples. The
// reference builds the whole kernel h_t[j] (segment s placed after the
// lengths of the segments before it) in 128-bit fixed point and convolves it
// with the input directly. Checked every clock:
//   r_full(t) = r_t(t-LAT+1)                     (full precision)
//   r_out(t)  = sat32(floor(r_t(t-LAT) / 2^50))  (compressed)
// with LAT = K + SEGS + 4 = 15. Tests cover short and 500-sample segments,
// unused trailing segments, and coefficients large enough to saturate.
module pp_filter_tb;
  import rppf_pkg::*;

  localparam int LAT  = K + SEGS + 4;
  localparam int HMAX = 8192;
  localparam int KMAX = SEGS * L_MAX + 1;

  logic clk = 1'b0;
  logic rst, clear;
  seg_cfg_t cfg [SEGS];
  logic signed [SAMPLE_W-1:0] v_in;
  logic signed [SUM_W-1:0]    r_full;
  logic signed [OUT_W-1:0]    r_out;

  pp_filter dut (.clk, .rst, .clear, .cfg, .v_in, .r_full, .r_out);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, saturated = 0;
  logic signed [SAMPLE_W-1:0] vh [HMAX];
  logic signed [127:0]        ht [KMAX];
  int                         klen;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [127:0] rt(int m);
    logic signed [127:0] s;
    s = 0;
    for (int j = 1; j <= klen; j++)
      if (m - j + 1 >= 0) s += ht[j] * 128'(vh[m-j+1]);
    return s;
  endfunction

  function automatic logic signed [OUT_W-1:0] compress(logic signed [127:0] x);
    logic signed [127:0] q;
    q = x >>> COEF_FRAC;
    if (q > 128'sd2147483647)  return 32'sh7fffffff;
    if (q < -128'sd2147483648) return 32'sh80000000;
    return q[OUT_W-1:0];
  endfunction

  // coef_shift, kstep: coefficient c'_k magnitude about 2^(COEF_FRAC - coef_shift - kstep*k)
  task automatic run_cfg(int lens [SEGS], int nused, int coef_shift, int kstep, int ncyc);
    logic signed [127:0] c [K+1];
    logic signed [127:0] e_full;
    int off;
    off = 0;
    for (int j = 0; j < KMAX; j++) ht[j] = 0;
    for (int s = 0; s < SEGS; s++) begin
      cfg[s].len = LEN_W'(lens[s]);
      for (int k = 1; k <= K; k++) cfg[s].lambda[k] = LAMBDA_W'(binom(lens[s] + k - 1, k));
      for (int k = 0; k <= K; k++) begin
        c[k] = (s < nused) ? ($signed(128'($urandom)) - 128'sd2147483648) <<< (COEF_FRAC - 31 - coef_shift - kstep*k) : 0;
        cfg[s].coef[k] = COEF_W'(c[k]);
      end
      for (int n = 1; n <= lens[s]; n++)
        for (int k = 0; k <= K; k++) ht[off + n] += c[k] * 128'(binom(n + k - 1, k));
      off += lens[s];
    end
    klen = off;
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    for (int c2 = 0; c2 < ncyc; c2++) begin
      if (c2 > 0) begin
        e_full = rt(c2 - LAT + 1);
        checks += 2;
        if (r_full !== SUM_W'(e_full)) begin
          failures++;
          if (failures < 10) $display("c=%0d r_full=%0h exp=%0h", c2, r_full, SUM_W'(e_full));
        end
        if (r_out !== compress(rt(c2 - LAT))) begin
          failures++;
          if (failures < 10) $display("c=%0d r_out=%0d exp=%0d", c2, r_out, compress(rt(c2 - LAT)));
        end
        if (r_out == 32'sh7fffffff || r_out == 32'sh80000000) saturated++;
      end
      vh[c2] = SAMPLE_W'($urandom);
      v_in = vh[c2];
      @(negedge clk);
    end
  endtask

  initial begin
    int l1 [SEGS] = '{1, 2, 3, 4, 5, 6, 7};
    int l2 [SEGS] = '{12, 30, 5, 60, 9, 17, 40};
    int l3 [SEGS] = '{500, 20, 1, 1, 1, 1, 1};
    int l4 [SEGS] = '{25, 25, 25, 25, 25, 25, 25};
    rst = 1'b1; clear = 1'b0; v_in = '0;
    for (int s = 0; s < SEGS; s++) begin cfg[s] = '0; cfg[s].len = 1; end
    repeat (3) @(negedge clk);
    rst = 1'b0;
    run_cfg(l1, SEGS, 4, 4, 100);
    run_cfg(l2, SEGS, 12, 4, 500);
    run_cfg(l3, 2, 16, 4, 700);
    run_cfg(l4, SEGS, -3, 0, 300);
    if (saturated == 0) begin
      failures++;
      $display("saturation never exercised");
    end
    $display("saturated outputs: %0d", saturated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
