// coef_regs_tb: writes random values to every field of every channel and
// segment (default 8 x 7) in random order and checks the register outputs
// against a shadow model after each write, including sign handling of
// coefficients, truncation of wide data, writes to nonexistent segments
// being ignored, and the clear pulse that follows exactly the L and Lambda
// writes of the addressed channel, one clock later.
module coef_regs_tb;
  import rppf_pkg::*;

  logic clk = 1'b0;
  logic rst;
  logic        wr_en;
  logic [2:0]  wr_chan, wr_seg;
  logic [3:0]  wr_idx;
  logic [63:0] wr_data;
  seg_cfg_t    cfg [CHANNELS][SEGS];
  logic signed [OUT_W-1:0] thresh [CHANNELS];
  logic [CHANNELS-1:0] clear;

  coef_regs dut (.clk, .rst, .wr_en, .wr_chan, .wr_seg, .wr_idx, .wr_data, .cfg, .thresh, .clear);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  seg_cfg_t            m_cfg [CHANNELS][SEGS];
  logic [OUT_W-1:0]    m_th  [CHANNELS];
  logic [CHANNELS-1:0] m_clear;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    checks++;
    if (clear !== m_clear) begin
      failures++;
      if (failures < 10) $display("%s: clear=%b exp=%b", what, clear, m_clear);
    end
    for (int c = 0; c < CHANNELS; c++) begin
      checks++;
      if (thresh[c] !== m_th[c]) begin
        failures++;
        if (failures < 10) $display("%s: thresh[%0d]", what, c);
      end
      for (int s = 0; s < SEGS; s++) begin
        checks++;
        if (cfg[c][s] !== m_cfg[c][s]) begin
          failures++;
          if (failures < 10) $display("%s: cfg[%0d][%0d]=%h exp %h", what, c, s, cfg[c][s], m_cfg[c][s]);
        end
      end
    end
  endtask

  initial begin
    int ch, sg, ix;
    logic [63:0] d;
    rst = 1'b1; wr_en = 1'b0; wr_chan = '0; wr_seg = '0; wr_idx = '0; wr_data = '0;
    for (int c = 0; c < CHANNELS; c++) begin
      m_th[c] = 32'h7fffffff;
      for (int s = 0; s < SEGS; s++) begin m_cfg[c][s] = '0; m_cfg[c][s].len = 1; end
    end
    m_clear = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    compare("reset");
    for (int i = 0; i < 3000; i++) begin
      ch = int'($urandom_range(0, CHANNELS - 1));
      sg = int'($urandom_range(0, 7));                 // 7 is not a segment
      case ($urandom_range(0, 3))
        0: ix = 0;
        1: ix = int'($urandom_range(1, K));
        2: ix = int'($urandom_range(K + 1, 2 * K + 1));
        default: ix = IDX_THRESH;
      endcase
      d = {$urandom, $urandom};
      if (ix == 0) d = 64'($urandom_range(1, L_MAX));
      wr_en = 1'b1; wr_chan = 3'(ch); wr_seg = 3'(sg); wr_idx = 4'(ix); wr_data = d;
      @(negedge clk);
      wr_en = 1'b0;
      m_clear = '0;
      if (ix == IDX_THRESH) m_th[ch] = d[OUT_W-1:0];
      else if (sg < SEGS) begin
        if (ix == 0) begin m_cfg[ch][sg].len = d[LEN_W-1:0]; m_clear[ch] = 1'b1; end
        else if (ix <= K) begin m_cfg[ch][sg].lambda[ix] = d[LAMBDA_W-1:0]; m_clear[ch] = 1'b1; end
        else m_cfg[ch][sg].coef[ix-K-1] = d[COEF_W-1:0];
      end
      compare("write");
      @(negedge clk);
      m_clear = '0;
      compare("idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
