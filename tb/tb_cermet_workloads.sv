// tb_cermet_workloads -- the channel configurations of the paper's
// evaluation, run end to end.
//
// AES-256 rows (Table I): 2, 3, 4, 8, 9 and 11 channels of 128-bit units in
// GF(2^16), parallel multiplier, 17-cycle core. The expected block period is
// 17 cycles up to 8 channels and 2*N_CH cycles from 9 channels on, where the
// multiplier rather than the core limits throughput (Table I: 6.02 Gbps at 8
// channels, 6.40 Gbps from 9 on, at 100 MHz).
// ECC configuration (Table III): 16 channels of 256-bit units with the serial
// multiplier (8192 cycles of multiplication per block) and a core of 83016
// cycles per unit, the latency implied by the paper's 4934 kbps for 16 x 256
// bits at 100 MHz.
// Multi-clock option (Fig. 7): 5 channels with the receiver on one half and
// one quarter of the core's clock, the frequencies the paper tried.
module tb_cermet_workloads;
  import cermet_pkg::*;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  localparam int NCFG = 9;
  bit done [NCFG];
  int checks [NCFG];
  int failures [NCFG];

  cermet_harness #(.NAME("2ch-AES"),  .USE_DEFAULTS(0), .N_CH(2),  .LAT(17), .BLOCKS(20)) h0 (.clk, .rst_n, .done(done[0]), .checks(checks[0]), .failures(failures[0]));
  cermet_harness #(.NAME("3ch-AES"),  .USE_DEFAULTS(0), .N_CH(3),  .LAT(17), .BLOCKS(20)) h1 (.clk, .rst_n, .done(done[1]), .checks(checks[1]), .failures(failures[1]));
  cermet_harness #(.NAME("4ch-AES"),  .USE_DEFAULTS(0), .N_CH(4),  .LAT(17), .BLOCKS(20)) h2 (.clk, .rst_n, .done(done[2]), .checks(checks[2]), .failures(failures[2]));
  cermet_harness #(.NAME("8ch-AES"),  .USE_DEFAULTS(0), .N_CH(8),  .LAT(17), .BLOCKS(20)) h3 (.clk, .rst_n, .done(done[3]), .checks(checks[3]), .failures(failures[3]));
  cermet_harness #(.NAME("9ch-AES"),  .USE_DEFAULTS(0), .N_CH(9),  .LAT(17), .BLOCKS(20)) h4 (.clk, .rst_n, .done(done[4]), .checks(checks[4]), .failures(failures[4]));
  cermet_harness #(.NAME("11ch-AES"), .USE_DEFAULTS(0), .N_CH(11), .LAT(17), .BLOCKS(20)) h5 (.clk, .rst_n, .done(done[5]), .checks(checks[5]), .failures(failures[5]));
  cermet_harness #(.NAME("16ch-ECC-serial"), .USE_DEFAULTS(0), .N_CH(16), .K_IN(256),
                   .MUL_ARCH(MUL_SERIAL), .LAT(83016), .BLOCKS(16)) h6 (.clk, .rst_n, .done(done[6]), .checks(checks[6]), .failures(failures[6]));
  // multi-clock option: receiver at 1/2 and 1/4 of the core clock
  cermet_harness #(.NAME("5ch-AES-half-clock"),    .USE_DEFAULTS(0), .N_CH(5), .LAT(17), .BLOCKS(20), .CLK_DIV(2)) h7 (.clk, .rst_n, .done(done[7]), .checks(checks[7]), .failures(failures[7]));
  cermet_harness #(.NAME("5ch-AES-quarter-clock"), .USE_DEFAULTS(0), .N_CH(5), .LAT(17), .BLOCKS(20), .CLK_DIV(4)) h8 (.clk, .rst_n, .done(done[8]), .checks(checks[8]), .failures(failures[8]));

  function automatic int total(input int a [NCFG]);
    int s = 0;
    for (int i = 0; i < NCFG; i++) s += a[i];
    return s;
  endfunction

  // Reset falls at time 1 so asynchronous resets see an edge, and is held
  // long enough for the slowest divided clock to tick during it.
  initial begin
    #1 rst_n = 0;
    repeat (12) @(posedge clk);
    rst_n = 1;
  end

  initial begin
    repeat (6000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total(checks), total(failures) + 1);
    $finish;
  end

  initial begin
    for (int i = 0; i < NCFG; i++) wait (done[i]);
    $display("TB_RESULT checks=%0d failures=%0d", total(checks), total(failures));
    $finish;
  end
endmodule
