// tb_sync_fifo -- self-checking test of the FIFO.
//
// Random writes and reads against a queue model: checks the data order, the
// full and empty flags and the count, and that a write into a full FIFO is
// refused unless a read frees a slot in the same cycle.
module tb_sync_fifo;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real edge for the asynchronous resets
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int W = 16, D = 4;
  logic wr_en, rd_en, full, empty;
  logic [W-1:0] wr_data, rd_data;
  logic [2:0] count;
  logic [W-1:0] model [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fullwrites;
    fullwrites = 0;
    wr_en = 0; rd_en = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == D) || count != 3'(model.size())) begin
        failures++;
        $display("flags: empty=%b full=%b count=%0d model=%0d", empty, full, count, model.size());
      end
      if (!empty) begin
        checks++;
        if (rd_data != model[0]) begin failures++; $display("data %h exp %h", rd_data, model[0]); end
      end
      wr_en   = ($urandom % 100) < ((i / 500) % 2 ? 70 : 35);
      rd_en   = ($urandom % 100) < ((i / 500) % 2 ? 35 : 70);
      wr_data = W'($urandom);
      @(posedge clk);
      if (wr_en && full) fullwrites++;
      if (rd_en && model.size() > 0) begin
        if (wr_en && model.size() == D) begin model.push_back(wr_data); void'(model.pop_front()); end
        else begin void'(model.pop_front()); if (wr_en) model.push_back(wr_data); end
      end else if (wr_en && model.size() < D) model.push_back(wr_data);
    end
    checks++;
    if (fullwrites == 0) begin failures++; $display("full FIFO never written"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
