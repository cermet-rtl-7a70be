// tb_mrd_matmul_serial -- self-checking test of the serial (A2) matrix
// multiplication at its default size (5 channels, 128-bit units, GF(2^16)).
//
// Feeds random units and checks each of the 5 x 8 single products it emits:
// its value against the reference H[j][ch] * D[k], that the one-hot masks
// cover every position once per unit, the first/last flags, one product every
// 2 cycles and exactly 2 * 5 * 8 = 80 cycles per unit when units come back to
// back.
module tb_mrd_matmul_serial;
  import tb_gf_ref_pkg::*;

  localparam int N = 5, M = 16, K = 128, NE = K / M, MC = 2;
  localparam int UNIT_CYC = MC * N * NE;
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

  mrd_matmul_serial dut (.*);

  typedef struct { int t; int ch; logic [K-1:0] d; bit f; bit l; } unit_t;
  unit_t pend [$];
  mat_t H;
  int cyc = 0, last_acc = -1000, b2b = 0, nprod = 0;
  logic [N-1:0][NE-1:0] seen;

  always @(posedge clk) cyc <= cyc + 1;

  // driver: 60 units; two of every three follow back to back, the third
  // after a random gap
  bit running = 0;
  int units = 0, gap = 0;
  always @(posedge clk) if (running) begin
    if (in_valid && in_ready) begin
      units++;
      in_valid <= 0;
      gap = (units % 3 == 0) ? 1 + $urandom % 4 : 0;
    end
    if (!(in_valid && !in_ready)) begin
      if (gap > 0) begin gap--; in_valid <= 0; end
      else begin
        in_valid <= 1;
        in_ch    <= 3'($urandom % N);
        for (int w = 0; w < K / 32; w++) in_data[w*32 +: 32] <= $urandom;
        in_first <= 1'($urandom % 2);
        in_last  <= 1'($urandom % 2);
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (prod_valid) begin
      checks++;
      if (pend.size() == 0) begin failures++; $display("unexpected product"); end
      else begin
        unit_t u;
        int j, k;
        logic [31:0] e;
        u = pend[0];
        j = nprod / NE; k = nprod % NE;
        e = ref_mul(H[j][u.ch], 32'(u.d[k*M +: M]), M, POLY);
        if (prod_mask != ((N*NE)'(1) << (j*NE + k)) || (seen & prod_mask) != 0) begin
          failures++; $display("mask %h at product %0d", prod_mask, nprod);
        end
        if (prod[j][k] != e[M-1:0]) begin
          failures++; $display("ch %0d (%0d,%0d) got %h exp %h", u.ch, j, k, prod[j][k], e[M-1:0]);
        end
        if (cyc - u.t != MC * (nprod + 1)) begin failures++; $display("product time %0d", cyc - u.t); end
        if (prod_first != u.f || prod_last != (u.l && nprod == N*NE-1)) begin
          failures++; $display("flags wrong at product %0d", nprod);
        end
        seen = seen | prod_mask;
        nprod++;
        if (nprod == N * NE) begin
          checks++;
          if (seen != '1) begin failures++; $display("positions missed"); end
          nprod = 0; seen = '0;
          void'(pend.pop_front());
        end
      end
    end
    if (in_valid && in_ready) begin
      if (cyc - last_acc == UNIT_CYC) b2b++;
      last_acc = cyc;
      pend.push_back('{cyc, int'(in_ch), in_data, in_first, in_last});
    end
  end

  initial begin
    H = ref_h(N, M, POLY);
    seen = '0;
    in_valid = 0; in_ch = 0; in_data = 0; in_first = 0; in_last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    running = 1;
    wait (units == 60);
    running = 0;
    @(posedge clk) in_valid <= 0;
    repeat (UNIT_CYC + 5) @(negedge clk);
    checks++;
    if (pend.size() != 0) begin failures++; $display("%0d units unfinished", pend.size()); end
    checks++;
    if (b2b < 20) begin failures++; $display("only %0d back-to-back units", b2b); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
