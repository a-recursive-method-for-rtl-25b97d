// workloads_tb: the filter shapes the evaluation uses, realised on one
// channel's filter at its default sizes, checked by their impulse response.
//
// Each kernel is given as ordinary polynomial pieces h_s[n] = sum_j c_j n^j
// (n = 1..L_s), as a kernel fit would produce them. The test converts them
// to the recursion basis (c'_k, so that h = sum_k c'_k C(n+k-1,k)) by back
// substitution:
//   c'_K = c_K K!,   c'_j = (c_j - sum_{k>j} |s(k,j)|/k! c'_k) j!
// with |s(k,j)| the unsigned Stirling numbers of the first kind, loads
// Lambda_k = C(L+k-1,k), feeds one impulse of height A and compares the
// output, clock by clock, with A*h evaluated directly from the c_j in real
// arithmetic (the output is rounded down, so it must lie in (A*h-1, A*h]
// up to a small tolerance). After the kernel ends the output must return
// to exactly zero, which shows that every order was truncated.
// Kernels, at 125 MS/s:
//   long trapezoid   1.6 us rise, 0.4 us flat top: pieces 200/50/200, orders 1,0,1
//   short trapezoid  80 ns rise, no flat top:      pieces 10/10, orders 1,1
//   cusp-like        flat-topped, orders 2,0,2:    pieces 100/20/100
//   seven pieces of order up to 4 over 2 us (250 samples), random shape
module workloads_tb;
  import rppf_pkg::*;

  localparam int LAT  = K + SEGS + 4;
  localparam int AMP  = 1000;

  logic clk = 1'b0;
  logic rst, clear;
  seg_cfg_t cfg [SEGS];
  logic signed [SAMPLE_W-1:0] v_in;
  logic signed [SUM_W-1:0]    r_full;
  logic signed [OUT_W-1:0]    r_out;

  pp_filter dut (.clk, .rst, .clear, .cfg, .v_in, .r_full, .r_out);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, kernels_done = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int  nseg;
  int  lens [SEGS];
  real cpoly [SEGS][K+1];

  function automatic real fact(int n);
    real f;
    f = 1.0;
    for (int i = 2; i <= n; i++) f *= real'(i);
    return f;
  endfunction

  // unsigned Stirling numbers of the first kind |s(k,j)|
  function automatic real stirling1(int k, int j);
    real s [K+1][K+1];
    for (int a = 0; a <= K; a++) for (int b = 0; b <= K; b++) s[a][b] = 0.0;
    s[0][0] = 1.0;
    for (int a = 1; a <= K; a++)
      for (int b = 1; b <= a; b++) s[a][b] = s[a-1][b-1] + real'(a - 1) * s[a-1][b];
    return s[k][j];
  endfunction

  function automatic real hval(int s, int n);
    real h, p;
    h = 0.0; p = 1.0;
    for (int j = 0; j <= K; j++) begin h += cpoly[s][j] * p; p *= real'(n); end
    return h;
  endfunction

  function automatic logic [COEF_W-1:0] to_fixed(real x);
    real sc;
    sc = x * (2.0 ** COEF_FRAC);
    return COEF_W'(longint'(sc));
  endfunction

  task automatic run_kernel(string name);
    real cp [K+1];
    real acc, e;
    int  total, off, seg, n;
    total = 0;
    for (int s = 0; s < SEGS; s++) begin
      cfg[s] = '0;
      if (s < nseg) begin
        for (int j = K; j >= 0; j--) begin
          acc = cpoly[s][j];
          for (int k = j + 1; k <= K; k++) acc -= stirling1(k, j) / fact(k) * cp[k];
          cp[j] = acc * fact(j);
        end
        cfg[s].len = LEN_W'(lens[s]);
        for (int k = 1; k <= K; k++) cfg[s].lambda[k] = LAMBDA_W'(binom(lens[s] + k - 1, k));
        for (int k = 0; k <= K; k++) cfg[s].coef[k] = to_fixed(cp[k]);
        total += lens[s];
      end else begin
        cfg[s].len = 1;
      end
    end
    @(negedge clk);
    clear = 1'b1; v_in = '0;
    @(negedge clk);
    clear = 1'b0;
    for (int c = 0; c < total + LAT + 100; c++) begin
      v_in = (c == 0) ? SAMPLE_W'(AMP) : '0;
      @(negedge clk);
      // r_out at clock c+1 responds to kernel sample j = c+1-LAT+1
      n = c + 1 - LAT + 1;
      e = 0.0;
      if (n >= 1 && n <= total) begin
        off = 0; seg = 0;
        while (n > off + lens[seg]) begin off += lens[seg]; seg++; end
        e = real'(AMP) * hval(seg, n - off);
      end
      checks++;
      if (n > total) begin
        if (r_out !== '0) begin
          failures++;
          if (failures < 10) $display("%s: tail n=%0d r_out=%0d", name, n, r_out);
        end
      end else if (real'(r_out) > e + 1.0e-3 || real'(r_out) < e - 1.0 - 1.0e-3) begin
        failures++;
        if (failures < 10) $display("%s: n=%0d r_out=%0d exp=%f", name, n, r_out, e);
      end
    end
    kernels_done++;
    $display("%s: %0d samples checked", name, total);
  endtask

  initial begin
    real L, u;
    rst = 1'b1; clear = 1'b0; v_in = '0;
    for (int s = 0; s < SEGS; s++) begin cfg[s] = '0; cfg[s].len = 1; end
    repeat (3) @(negedge clk);
    rst = 1'b0;

    // long trapezoid
    for (int s = 0; s < SEGS; s++) for (int j = 0; j <= K; j++) cpoly[s][j] = 0.0;
    nseg = 3; lens[0] = 200; lens[1] = 50; lens[2] = 200;
    cpoly[0][1] = 1.0 / 200.0;
    cpoly[1][0] = 1.0;
    cpoly[2][0] = 201.0 / 200.0; cpoly[2][1] = -1.0 / 200.0;
    run_kernel("long trapezoid");

    // short trapezoid
    for (int s = 0; s < SEGS; s++) for (int j = 0; j <= K; j++) cpoly[s][j] = 0.0;
    nseg = 2; lens[0] = 10; lens[1] = 10;
    cpoly[0][1] = 1.0 / 10.0;
    cpoly[1][0] = 11.0 / 10.0; cpoly[1][1] = -1.0 / 10.0;
    run_kernel("short trapezoid");

    // cusp-like flat top, orders 2, 0, 2
    for (int s = 0; s < SEGS; s++) for (int j = 0; j <= K; j++) cpoly[s][j] = 0.0;
    nseg = 3; lens[0] = 100; lens[1] = 20; lens[2] = 100;
    L = 100.0;
    cpoly[0][2] = 1.0 / (L * L);
    cpoly[1][0] = 1.0;
    cpoly[2][0] = (L + 1.0) * (L + 1.0) / (L * L);
    cpoly[2][1] = -2.0 * (L + 1.0) / (L * L);
    cpoly[2][2] = 1.0 / (L * L);
    run_kernel("cusp-like flat top");

    // seven random pieces up to order 4, 250 samples in all
    nseg = 7;
    lens = '{20, 40, 30, 50, 40, 30, 40};
    for (int s = 0; s < SEGS; s++)
      for (int j = 0; j <= K; j++) begin
        u = (real'($urandom_range(0, 2000)) - 1000.0) / 5000.0;
        cpoly[s][j] = u / (real'(lens[s]) ** j);
      end
    run_kernel("seven-piece order-4 kernel");

    if (kernels_done != 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
