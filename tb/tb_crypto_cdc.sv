// tb_crypto_cdc -- self-checking test of the crypto-core clock crossing.
//
// The receiver side runs on a slow clock (period 20) and the behavioural
// core (crypto_core_model, latency 3) on a fast one (period 7), as in the
// multi-clock option where the core keeps the fast clock. Random ciphertext
// units go in on the receiver side with random valid gaps, and the
// decrypted units are taken with a random ready. The test checks that every
// unit comes back decrypted, in order, none lost or repeated, and that
// back-pressure occurred on both the input and the output side.
module tb_crypto_cdc;
  localparam int K = 32, N = 2000, ROT = 7;
  logic sclk = 0, cclk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real edge for the asynchronous resets
  always #10  sclk = ~sclk;
  always #3.5 cclk = ~cclk;
  int checks = 0, failures = 0;

  logic         sys_in_valid, sys_in_ready, sys_out_valid, sys_out_ready;
  logic [K-1:0] sys_in_data, sys_out_data;
  logic         core_in_valid, core_in_ready, core_out_valid, core_out_ready;
  logic [K-1:0] core_in_data, core_out_data;

  crypto_cdc #(.K_IN(K), .DEPTH(4)) dut (
    .sys_clk(sclk), .sys_rst_n(rst_n), .core_clk(cclk), .core_rst_n(rst_n), .*);

  crypto_core_model #(.K_IN(K), .LAT(3)) u_core (
    .clk(cclk), .rst_n,
    .in_valid (core_in_valid),  .in_ready (core_in_ready),  .in_data (core_in_data),
    .out_valid(core_out_valid), .out_ready(core_out_ready), .out_data(core_out_data));

  // same stand-in cipher as crypto_core_model
  function automatic logic [K-1:0] dec(input logic [K-1:0] y);
    logic [K-1:0] k;
    for (int i = 0; i < K; i++) k[i] = ((i * 37 + 11) % 5) < 2;
    return ((y >> ROT) | (y << (K - ROT))) ^ k;
  endfunction

  initial begin
    repeat (100000) @(posedge sclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [K-1:0] model [$];
  int sent = 0, got = 0, n_in_stall = 0, n_out_stall = 0;
  bit slow_out = 0;

  always @(negedge sclk) begin
    if (!sys_in_valid || sys_in_ready) begin
      sys_in_valid <= rst_n && sent < N && ($urandom % 4 != 0);
      sys_in_data  <= K'($urandom);
    end
    sys_out_ready <= rst_n && (slow_out ? ($urandom % 8 == 0) : ($urandom % 4 != 0));
  end

  always @(posedge sclk) if (rst_n) begin
    if (sys_in_valid && !sys_in_ready) n_in_stall++;
    if (sys_out_valid && !sys_out_ready) n_out_stall++;
    if (sys_in_valid && sys_in_ready) begin
      model.push_back(dec(sys_in_data));
      sent++;
    end
    if (sys_out_valid && sys_out_ready) begin
      checks++;
      got++;
      if (model.size() == 0) begin
        failures++;
        $display("unit %0d came out before it went in", got);
      end else begin
        logic [K-1:0] exp;
        exp = model.pop_front();
        if (sys_out_data !== exp) begin
          failures++;
          if (failures < 10) $display("unit %0d: got %h expected %h", got, sys_out_data, exp);
        end
      end
    end
  end

  initial begin
    sys_in_valid = 0; sys_in_data = '0; sys_out_ready = 0;
    repeat (4) @(posedge sclk);
    rst_n = 1;
    wait (sent == N / 2);
    slow_out = 1;        // starve the output so the core side backs up
    wait (sent == N);
    slow_out = 0;
    repeat (200) @(posedge sclk);
    checks += 3;
    if (got != N)         begin failures++; $display("%0d units sent, %0d returned", N, got); end
    if (n_in_stall == 0)  begin failures++; $display("input side never stalled"); end
    if (n_out_stall == 0) begin failures++; $display("output side never stalled"); end
    $display("%0d units, input stalls %0d, output stalls %0d", got, n_in_stall, n_out_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
