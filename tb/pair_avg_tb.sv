// pair_avg_tb: checks the pair average against floor((s0+s1)/2) for corner
// and random sample pairs, with a latency of one clock.
module pair_avg_tb;
  localparam int unsigned SW = 14;

  logic clk = 1'b0;
  logic rst;
  logic signed [SW-1:0] s0, s1, avg;

  pair_avg dut (.clk, .rst, .s0, .s1, .avg);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int floor_avg(int a, int b);
    int s;
    s = a + b;
    return (s >= 0) ? s / 2 : -((-s + 1) / 2);
  endfunction

  initial begin
    int a, b, exp_v;
    int ca [6] = '{-8192, 8191, -1, 0, 1, -125};
    rst = 1'b1; s0 = '0; s1 = '0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 36 + 1000; i++) begin
      if (i < 36) begin a = ca[i % 6]; b = ca[i / 6]; end
      else begin a = $signed(SW'($urandom)); b = $signed(SW'($urandom)); end
      s0 = SW'(a); s1 = SW'(b);
      @(negedge clk);
      exp_v = floor_avg(a, b);
      checks++;
      if (avg !== SW'(exp_v)) begin
        failures++;
        if (failures < 10) $display("a=%0d b=%0d avg=%0d exp=%0d", a, b, avg, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
