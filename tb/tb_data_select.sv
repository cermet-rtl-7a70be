// tb_data_select -- self-checking test of the plain-data registers and the
// selection multiplexer (5 channels, channel 0 encrypted).
//
// Loads random units into random plain channels and checks that selecting a
// channel returns the unit last loaded into it, that a plain register keeps
// its unit while its FIFO head changes, and that selecting the encrypted
// channel returns the cryptographic core's output.
module tb_data_select;
  localparam int N = 5, K = 128;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real edge for the asynchronous resets
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] load;
  logic [N-1:0][K-1:0] fifo_data;
  logic [K-1:0] crypto_data, sel_data;
  logic [2:0] sel;

  data_select dut (.*);

  logic [K-1:0] model [N];

  function automatic logic [K-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; fifo_data = '0; crypto_data = '0; sel = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < N; j++) model[j] = '0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      load = N'($urandom);
      for (int j = 0; j < N; j++) fifo_data[j] = rnd();
      crypto_data = rnd();
      for (int j = 1; j < N; j++) if (load[j]) model[j] = fifo_data[j];
      @(negedge clk);
      load = 0;
      for (int j = 0; j < N; j++) fifo_data[j] = rnd();
      for (int s = 0; s < N; s++) begin
        sel = 3'(s);
        #1;
        checks++;
        if (sel_data != ((s == 0) ? crypto_data : model[s])) begin
          failures++; $display("sel %0d got %h", s, sel_data);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
