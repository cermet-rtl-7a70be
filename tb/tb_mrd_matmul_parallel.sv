// tb_mrd_matmul_parallel -- self-checking test of the parallel (A1) matrix
// multiplication at its default size (5 channels, 128-bit units, GF(2^16)).
//
// Feeds random units of random channels, sometimes back to back and sometimes
// with gaps, and checks every one of the 5 x 8 products against the reference
// H[j][ch] * D[k], the first/last flags, the 2-cycle latency and that
// back-to-back units are accepted every 2 cycles.
module tb_mrd_matmul_parallel;
  import tb_gf_ref_pkg::*;

  localparam int N = 5, M = 16, K = 128, NE = K / M, LATENCY = 2;
  localparam logic [31:0] POLY = 32'h1100B;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real edge for the asynchronous resets
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, in_first, in_last;
  logic [2:0] in_ch;
  logic [K-1:0] in_data;
  logic prod_valid, prod_first, prod_last;
  logic [N-1:0][NE-1:0][M-1:0] prod;
  logic [N-1:0][NE-1:0] prod_mask;

  mrd_matmul_parallel dut (.*);

  typedef struct { int t; int ch; logic [K-1:0] d; bit f; bit l; } unit_t;
  unit_t pend [$];
  mat_t H;
  int cyc = 0, last_acc = -100, b2b = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // driver: a new unit after every accept; continuous for 300 cycles, then
  // with random gaps
  bit running = 0;
  int i = 0;
  always @(posedge clk) if (running) begin
    i++;
    if (!in_valid || in_ready) begin
      in_valid <= (i < 300) ? 1'b1 : (($urandom % 3) != 0);
      in_ch    <= 3'($urandom % N);
      for (int w = 0; w < K / 32; w++) in_data[w*32 +: 32] <= $urandom;
      if (i % 7 == 0) in_data[15:0] <= 0;
      in_first <= 1'($urandom % 2);
      in_last  <= 1'($urandom % 2);
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(negedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      if (cyc - last_acc == LATENCY) b2b++;
      last_acc = cyc;
      pend.push_back('{cyc, int'(in_ch), in_data, in_first, in_last});
    end
    if (prod_valid) begin
      unit_t u;
      checks++;
      if (pend.size() == 0) begin failures++; $display("unexpected product"); end
      else begin
        u = pend.pop_front();
        if (cyc - u.t != LATENCY) begin failures++; $display("latency %0d", cyc - u.t); end
        if (prod_first != u.f || prod_last != u.l || prod_mask != '1) begin
          failures++; $display("flags wrong");
        end
        for (int j = 0; j < N; j++) for (int k = 0; k < NE; k++) begin
          logic [31:0] e;
          e = ref_mul(H[j][u.ch], 32'(u.d[k*M +: M]), M, POLY);
          checks++;
          if (prod[j][k] != e[M-1:0]) begin
            failures++;
            $display("ch %0d prod[%0d][%0d]=%h exp %h", u.ch, j, k, prod[j][k], e[M-1:0]);
          end
        end
      end
    end
  end

  initial begin
    H = ref_h(N, M, POLY);
    in_valid = 0; in_ch = 0; in_data = 0; in_first = 0; in_last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    running = 1;
    repeat (600) @(posedge clk);
    running = 0;
    @(posedge clk) in_valid <= 0;
    repeat (5) @(negedge clk);
    checks++;
    if (pend.size() != 0) begin failures++; $display("%0d units lost", pend.size()); end
    checks++;
    if (b2b < 250) begin failures++; $display("only %0d back-to-back accepts", b2b); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
