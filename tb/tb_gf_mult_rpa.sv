// tb_gf_mult_rpa -- self-checking test of the RPA multiplier.
//
// Multiplies corner values and random pairs in GF(2^16) (2-cycle multiplier)
// and in GF(2^8) with the AES polynomial (1-cycle multiplier), compares each
// product with a carry-less multiply and long division, and checks that the
// product arrives MUL_CYCLES cycles after the start and that starts every
// MUL_CYCLES cycles are all accepted.
module tb_gf_mult_rpa;
  import tb_gf_ref_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real edge for the asynchronous resets
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        s16, b16, d16;
  logic [15:0] a16, bb16, c16;
  logic        s8, b8, d8;
  logic [7:0]  a8, bb8, c8;

  gf_mult_rpa #(.M(16), .POLY(17'h1100B), .CYCLES(2)) dut16 (
    .clk(clk), .rst_n(rst_n), .start(s16), .a(a16), .b(bb16), .busy(b16), .done(d16), .c(c16));
  gf_mult_rpa #(.M(8), .POLY(9'h11B), .CYCLES(1)) dut8 (
    .clk(clk), .rst_n(rst_n), .start(s8), .a(a8), .b(bb8), .busy(b8), .done(d8), .c(c8));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run16(input logic [15:0] a, input logic [15:0] b);
    logic [31:0] exp;
    exp = ref_mul(32'(a), 32'(b), 16, 32'h1100B);
    @(negedge clk);
    checks++;
    if (b16) begin failures++; $display("16: busy at start"); end
    s16 = 1; a16 = a; bb16 = b;
    @(negedge clk);
    s16 = 0; a16 = $urandom; bb16 = $urandom;   // operands may change after start
    checks++;
    if (d16) begin failures++; $display("16: done too early"); end
    @(negedge clk);
    checks++;
    if (!d16 || c16 != exp[15:0]) begin
      failures++;
      $display("16: %h*%h got %h done=%b exp %h", a, b, c16, d16, exp[15:0]);
    end
  endtask

  task automatic run8(input logic [7:0] a, input logic [7:0] b);
    logic [31:0] exp;
    exp = ref_mul(32'(a), 32'(b), 8, 32'h11B);
    @(negedge clk);
    s8 = 1; a8 = a; bb8 = b;
    @(negedge clk);
    s8 = 0;
    checks++;
    if (!d8 || c8 != exp[7:0]) begin
      failures++;
      $display("8: %h*%h got %h exp %h", a, b, c8, exp[7:0]);
    end
  endtask

  initial begin
    s16 = 0; s8 = 0; a16 = 0; bb16 = 0; a8 = 0; bb8 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run16(0, 16'h1234); run16(16'h1234, 0); run16(1, 16'hBEEF); run16(16'hFFFF, 16'hFFFF);
    run16(16'h8000, 2);
    run8(8'h57, 8'h83);    // FIPS-197 example: 0xC1
    checks++;
    if (c8 != 8'hC1) begin failures++; $display("AES example wrong"); end
    for (int i = 0; i < 2000; i++) run16($urandom, $urandom);
    for (int i = 0; i < 500; i++)  run8($urandom, $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
