// clock_divider -- derives the slow clock of the multi-clock option.
//
// The paper's multi-clock variant runs part of the receiver on a clock
// derived from the original one; it reports trials at one half and one
// quarter of the original frequency. This divider produces clk_in / DIV with a
// 50 % duty cycle (DIV even) from a counter and a toggling flip-flop, so its
// output is glitch-free. Reset holds the output low. DIV = 1 passes the clock
// through. How the slow clock is made is not specified for the original
// design; the counter-and-toggle divider is this design's choice (a chip
// would often take it from its clock generator instead).
module clock_divider #(
  parameter int unsigned DIV = 2
) (
  input  logic clk_in,
  input  logic rst_n,
  output logic clk_out
);
  localparam int unsigned HALF = (DIV > 1) ? DIV / 2 : 1;
  localparam int unsigned CW   = (HALF > 1) ? $clog2(HALF) : 1;

  if (DIV <= 1) begin : g_bypass
    assign clk_out = clk_in;
  end else begin : g_div
    logic [CW-1:0] cnt_q;
    logic          clk_q;
    always_ff @(posedge clk_in or negedge rst_n) begin
      if (!rst_n) begin
        cnt_q <= '0;
        clk_q <= 1'b0;
      end else if (cnt_q == CW'(HALF - 1)) begin
        cnt_q <= '0;
        clk_q <= ~clk_q;
      end else begin
        cnt_q <= cnt_q + 1'b1;
      end
    end
    assign clk_out = clk_q;
  end

  initial assert (DIV <= 1 || DIV % 2 == 0) else $error("DIV must be 1 or even");

endmodule
