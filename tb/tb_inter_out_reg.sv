// tb_inter_out_reg -- self-checking test of the intermediate output register.
//
// Sends blocks of random products with random masks (full masks as from the
// parallel multiplier, one-hot masks as from the serial one), with idle
// cycles in between, and checks that the block handed out on the last
// product equals the XOR of all products sent for each position since the
// block's first write, and that out_valid is high only then.
module tb_inter_out_reg;
  localparam int N = 5, M = 16, K = 128, NE = K / M;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real edge for the asynchronous resets
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_first, in_last, out_valid;
  logic [N-1:0][NE-1:0][M-1:0] in_prod;
  logic [N-1:0][NE-1:0] in_mask;
  logic [N-1:0][K-1:0] out_data;

  inter_out_reg dut (.*);

  logic [M-1:0] model [N][NE];
  int blocks = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input bit first, input bit last, input bit onehot);
    @(negedge clk);
    in_valid = 1; in_first = first; in_last = last;
    for (int j = 0; j < N; j++) for (int k = 0; k < NE; k++) in_prod[j][k] = M'($urandom);
    if (onehot) begin
      int p = $urandom % (N * NE);
      in_mask = '0;
      in_mask[p / NE][p % NE] = 1'b1;
    end else in_mask = ($urandom % 4 == 0) ? (N*NE)'({$urandom, $urandom}) : '1;
    for (int j = 0; j < N; j++) for (int k = 0; k < NE; k++)
      if (in_mask[j][k]) model[j][k] = first ? in_prod[j][k] : (model[j][k] ^ in_prod[j][k]);
    #1;
    checks++;
    if (out_valid != last) begin failures++; $display("out_valid=%b last=%b", out_valid, last); end
    if (last) begin
      for (int j = 0; j < N; j++) for (int k = 0; k < NE; k++) begin
        checks++;
        if (out_data[j][k*M +: M] != model[j][k]) begin
          failures++;
          $display("block %0d out[%0d][%0d]=%h exp %h", blocks, j, k, out_data[j][k*M +: M], model[j][k]);
        end
      end
      blocks++;
    end
    if ($urandom % 3 == 0) begin
      @(negedge clk) in_valid = 0; in_last = 1;
      #1 checks++;
      if (out_valid) begin failures++; $display("out_valid without in_valid"); end
    end
  endtask

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_prod = '0; in_mask = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 200; b++) begin
      bit onehot = b % 2;
      int units = onehot ? N * NE : N;
      // first unit writes every position (full mask) so the block is defined
      @(negedge clk);
      in_valid = 1; in_first = 1; in_last = 0; in_mask = '1;
      for (int j = 0; j < N; j++) for (int k = 0; k < NE; k++) begin
        in_prod[j][k] = M'($urandom); model[j][k] = in_prod[j][k];
      end
      for (int u = 1; u < units; u++) send(0, u == units - 1, onehot);
    end
    @(negedge clk) in_valid = 0;
    checks++;
    if (blocks != 200) begin failures++; $display("blocks %0d", blocks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
