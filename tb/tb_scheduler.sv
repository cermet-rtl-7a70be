// tb_scheduler -- self-checking test of the scheduler (5 channels).
//
// Availability of each channel and the downstream ready are random. The test
// keeps its own queue of fetched channels and checks that units are issued in
// fetch order (channel order within one cycle), that a channel is fetched only
// when available and at most once per block, that every block issues each
// channel exactly once with first/last on its first and fifth unit, and that
// nothing fetched is lost.
module tb_scheduler;
  localparam int N = 5;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real edge for the asynchronous resets
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] avail, load;
  logic issue_valid, issue_ready, issue_first, issue_last;
  logic [2:0] issue_ch;

  scheduler dut (.*);

  int q [$];
  bit [N-1:0] fetched_blk, issued_blk;
  int issued_in_blk = 0, blocks = 0, waited_head = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    // fetch checks
    checks++;
    if ((load & ~avail) != 0) begin failures++; $display("load without avail"); end
    checks++;
    if ((load & fetched_blk) != 0) begin failures++; $display("channel fetched twice in a block"); end
    // issue checks
    checks++;
    if (issue_valid != (q.size() > 0)) begin failures++; $display("issue_valid=%b q=%0d", issue_valid, q.size()); end
    if (issue_valid) begin
      checks++;
      if (int'(issue_ch) != q[0]) begin failures++; $display("issued %0d expected %0d", issue_ch, q[0]); end
      checks++;
      if (issue_first != (issued_in_blk == 0) || issue_last != (issued_in_blk == N - 1)) begin
        failures++; $display("flags wrong at unit %0d", issued_in_blk);
      end
      if (!issue_ready) waited_head++;
    end
  end

  // model update on the clock edge, using the values seen before it
  always @(posedge clk) if (rst_n) begin
    if (issue_valid && issue_ready) begin
      checks++;
      if (issued_blk[issue_ch]) begin failures++; $display("channel %0d twice in block", issue_ch); end
      issued_blk[issue_ch] = 1;
      void'(q.pop_front());
      issued_in_blk++;
      if (issued_in_blk == N) begin
        checks++;
        if (issued_blk != '1) begin failures++; $display("block incomplete"); end
        issued_in_blk = 0; issued_blk = '0; blocks++;
      end
    end
    for (int j = 0; j < N; j++) if (load[j]) begin q.push_back(j); fetched_blk[j] = 1; end
    if (fetched_blk == '1) fetched_blk = '0;
    avail       <= N'($urandom) & N'($urandom | $urandom);
    issue_ready <= ($urandom % 4) != 0;
  end

  initial begin
    avail = 0; issue_ready = 0; fetched_blk = 0; issued_blk = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20000) @(posedge clk);
    checks++;
    if (blocks < 1000) begin failures++; $display("only %0d blocks", blocks); end
    checks++;
    if (waited_head == 0) begin failures++; $display("back-pressure never seen"); end
    $display("blocks=%0d", blocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
