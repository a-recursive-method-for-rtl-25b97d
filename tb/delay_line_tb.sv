// delay_line_tb: checks dout(t) = din(t-1-len) against a history array,
// for lengths 1, 2, 17, L_MAX-1 and L_MAX at the default L_MAX = 500, with
// restarts: after reset or clear, samples older than the restart must read
// as zero.
module delay_line_tb;
  localparam int unsigned LM = 500;
  localparam int unsigned W  = 14;
  localparam int unsigned LW = $clog2(LM + 1);

  logic clk = 1'b0;
  logic rst, clear;
  logic [LW-1:0] len;
  logic signed [W-1:0] din, dout;

  delay_line dut (.clk, .rst, .clear, .len, .din, .dout);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic signed [W-1:0] hist [4096];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int l, int ncyc);
    logic signed [W-1:0] e;
    len = LW'(l);
    @(negedge clk);
    clear = 1'b1;
    din = SW_rand();
    @(negedge clk);
    clear = 1'b0;
    for (int c = 0; c < ncyc; c++) begin
      if (c > 0) begin
        e = (c - 1 - l >= 0) ? hist[c-1-l] : '0;
        checks++;
        if (dout !== e) begin
          failures++;
          if (failures < 10) $display("len=%0d c=%0d dout=%0d exp=%0d", l, c, dout, e);
        end
      end
      hist[c] = SW_rand();
      din = hist[c];
      @(negedge clk);
    end
  endtask

  function automatic logic signed [W-1:0] SW_rand();
    return W'($urandom);
  endfunction

  initial begin
    rst = 1'b1; clear = 1'b0; len = LW'(1); din = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    run(1, 50);
    run(2, 50);
    run(17, 100);
    run(LM - 1, 1200);
    run(LM, 1300);
    run(3, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
