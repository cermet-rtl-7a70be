// tb_clock_divider -- self-checking test of the clock divider.
//
// Instances with DIV = 1 (bypass), 2, 4 and 6 run from a 10-unit clock. The
// test checks that each divided clock stays low during reset and then has a
// period of exactly DIV input periods with a 50 % duty cycle, measured
// between its own edges over many cycles.
module tb_clock_divider;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real edge for the asynchronous resets
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NDIV = 4;
  localparam int DIVS [NDIV] = '{1, 2, 4, 6};
  logic [NDIV-1:0] clk_out;

  for (genvar d = 0; d < NDIV; d++) begin : g_dut
    clock_divider #(.DIV(DIVS[d])) dut (.clk_in(clk), .rst_n, .clk_out(clk_out[d]));
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // edge times of each divided clock after reset
  realtime last_rise [NDIV], last_fall [NDIV];
  int      n_rise [NDIV];
  bit      run = 0;   // set when reset is released
  for (genvar d = 0; d < NDIV; d++) begin : g_mon
    always @(posedge clk_out[d]) if (run) begin
      if (n_rise[d] > 0) begin
        checks++;
        if ($realtime - last_rise[d] != 10.0 * DIVS[d]) begin
          failures++;
          if (failures < 10) $display("DIV=%0d: period %0t, expected %0d", DIVS[d], $realtime - last_rise[d], 10 * DIVS[d]);
        end
      end
      n_rise[d]++;
      last_rise[d] = $realtime;
    end
    always @(negedge clk_out[d]) if (run && n_rise[d] > 0) begin
      checks++;
      if ($realtime - last_rise[d] != 5.0 * DIVS[d]) begin
        failures++;
        if (failures < 10) $display("DIV=%0d: high for %0t, expected %0d", DIVS[d], $realtime - last_rise[d], 5 * DIVS[d]);
      end
      last_fall[d] = $realtime;
    end
  end

  initial begin
    n_rise = '{default: 0};
    repeat (4) @(negedge clk);
    // in reset the divided clocks are held low (the bypass follows clk)
    for (int d = 1; d < NDIV; d++) begin
      checks++;
      if (clk_out[d] !== 1'b0) begin failures++; $display("DIV=%0d: clock not low in reset", DIVS[d]); end
    end
    rst_n = 1;
    run = 1;
    repeat (600) @(posedge clk);
    for (int d = 0; d < NDIV; d++) begin
      checks++;
      if (n_rise[d] < 600 / DIVS[d] - 2) begin
        failures++;
        $display("DIV=%0d: only %0d rising edges in 600 input cycles", DIVS[d], n_rise[d]);
      end
      $display("DIV=%0d: %0d rising edges in 600 input cycles", DIVS[d], n_rise[d]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
