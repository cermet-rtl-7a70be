// tb_cermet_receiver -- end-to-end test of the receiver at its default
// parameters (5 channels, 128-bit units, GF(2^16), parallel multiplier) with
// a 17-cycle stand-in for the AES-256 core. See cermet_harness for what is
// driven and checked; the expected block period is 17 cycles.
module tb_cermet_receiver;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  bit done;
  int checks, failures;

  cermet_harness #(.NAME("5ch-AES"), .USE_DEFAULTS(1'b1), .LAT(17), .BLOCKS(40)) u_h (
    .clk, .rst_n, .done, .checks, .failures);

  // Reset falls at time 1 so asynchronous resets see an edge, and is held
  // long enough for the slowest divided clock to tick during it.
  initial begin
    #1 rst_n = 0;
    repeat (12) @(posedge clk);
    rst_n = 1;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
