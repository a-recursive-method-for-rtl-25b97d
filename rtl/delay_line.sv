// delay_line: run-time programmable sample delay of one filter segment.
//
// Each segment needs its input delayed by its length L, both for the
// truncating subtraction Lambda_k * v[n-L] and as the input of the next
// segment. The delay is a circular buffer of L_MAX words: every clock the new
// sample is written at the write pointer and the word written len clocks
// earlier is read and registered. A fill counter, restarted by rst or clear,
// makes any word not yet written since then read as zero; the recursion
// downstream therefore starts from an all-zero history without the array
// itself being cleared.
//
// Interface: len must lie in 1..L_MAX (asserted). din and dout are signed.
// Timing: dout(t) = din(t-1-len), i.e. len clocks of delay plus one register.
// The length limit of 500 samples follows the published implementation; the
// buffer organisation and fill masking are this design's own.
module delay_line #(
  parameter int unsigned L_MAX = 500,
  parameter int unsigned W     = 14,
  parameter int unsigned LEN_W = $clog2(L_MAX + 1)
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                clear,
  input  logic [LEN_W-1:0]    len,
  input  logic signed [W-1:0] din,
  output logic signed [W-1:0] dout
);

  localparam int unsigned AW = (L_MAX > 1) ? $clog2(L_MAX) : 1;

  logic [W-1:0]     mem [L_MAX];
  logic [AW-1:0]    wp;
  logic [AW-1:0]    rp;
  logic [LEN_W-1:0] fill;       // words written since restart, saturates at L_MAX
  logic             have;

  always_comb begin
    if ({{(32-AW){1'b0}}, wp} >= {{(32-LEN_W){1'b0}}, len})
      rp = AW'({{(32-AW){1'b0}}, wp} - {{(32-LEN_W){1'b0}}, len});
    else
      rp = AW'({{(32-AW){1'b0}}, wp} + L_MAX - {{(32-LEN_W){1'b0}}, len});
    have = (fill >= len);
  end

  always_ff @(posedge clk) begin
    mem[wp] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      wp   <= '0;
      fill <= '0;
      dout <= '0;
    end else begin
      wp   <= (wp == AW'(L_MAX - 1)) ? '0 : wp + 1'b1;
      if (fill != LEN_W'(L_MAX)) fill <= fill + 1'b1;
      dout <= have ? mem[rp] : '0;
    end
  end

  a_len_range: assert property (@(posedge clk) disable iff (rst)
                                (len >= 1) && (len <= LEN_W'(L_MAX)))
    else $error("delay_line: len %0d outside 1..%0d", len, L_MAX);

endmodule
