// tb_async_fifo -- self-checking test of the dual-clock FIFO.
//
// Two FIFOs are tested at once, one writing on a fast clock and reading on a
// slow one and one the other way round; the clock periods (7 and 13 time
// units) are unrelated so every phase relation between the edges occurs.
// Each side drives random enables and a queue model checks the data order.
// A second phase stops the reader and checks that exactly DEPTH words are
// accepted before full holds the writer off, and that they all come out
// afterwards. Counters make sure full and empty both occurred.
module tb_async_fifo;
  localparam int W = 16, D = 4, N = 3000;
  logic fclk = 0, sclk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real edge for the asynchronous resets
  always #3.5 fclk = ~fclk;
  always #6.5 sclk = ~sclk;
  int checks = 0, failures = 0;

  // instance 0: fast writer, slow reader; instance 1: slow writer, fast reader
  logic [1:0]         wclk, rclk, wr_en, rd_en, full, empty;
  logic [1:0][W-1:0]  wr_data, rd_data;
  assign wclk = {sclk, fclk};
  assign rclk = {fclk, sclk};

  for (genvar u = 0; u < 2; u++) begin : g_dut
    async_fifo #(.WIDTH(W), .DEPTH(D)) dut (
      .wr_clk(wclk[u]), .wr_rst_n(rst_n), .wr_en(wr_en[u]), .wr_data(wr_data[u]), .full(full[u]),
      .rd_clk(rclk[u]), .rd_rst_n(rst_n), .rd_en(rd_en[u]), .rd_data(rd_data[u]), .empty(empty[u]));
  end

  logic [W-1:0] model0 [$];
  logic [W-1:0] model1 [$];
  int  sent [2], got [2], n_full [2], n_empty [2], accepted [2];
  bit  rd_stop = 0, wr_stop = 0, burst = 0;

  initial begin
    repeat (200000) @(posedge fclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar u = 0; u < 2; u++) begin : g_side
    // writer: enables change on the falling edge, transfers on the rising edge
    always @(negedge wclk[u]) begin
      wr_en[u]   <= rst_n && !wr_stop && (burst ? sent[u] < N + D + 2 : sent[u] < N) && ($urandom % 3 != 0);
      wr_data[u] <= W'($urandom);
    end
    always @(posedge wclk[u]) if (rst_n) begin
      if (full[u]) n_full[u]++;
      if (wr_en[u] && !full[u]) begin
        if (u == 0) model0.push_back(wr_data[u]); else model1.push_back(wr_data[u]);
        sent[u]++;
        if (burst) accepted[u]++;
      end
    end
    // reader
    always @(negedge rclk[u]) rd_en[u] <= rst_n && !rd_stop && ($urandom % 3 != 0);
    always @(posedge rclk[u]) if (rst_n) begin
      if (empty[u]) n_empty[u]++;
      if (rd_en[u] && !empty[u]) begin
        logic [W-1:0] exp;
        exp = (u == 0) ? model0.pop_front() : model1.pop_front();
        checks++;
        got[u]++;
        if (rd_data[u] !== exp) begin
          failures++;
          if (failures < 10) $display("fifo %0d word %0d: got %h expected %h", u, got[u], rd_data[u], exp);
        end
      end
    end
  end

  initial begin
    wr_en = '0; rd_en = '0; wr_data = '0;
    sent = '{0, 0}; got = '{0, 0}; n_full = '{0, 0}; n_empty = '{0, 0}; accepted = '{0, 0};
    repeat (4) @(posedge sclk);
    rst_n = 1;
    // phase 1: random traffic on both sides
    wait (got[0] == N && got[1] == N);
    // phase 2: reader stopped, writer tries more than DEPTH words
    rd_stop = 1;
    repeat (10) @(posedge sclk);
    burst = 1;
    repeat (60) @(posedge sclk);
    wr_stop = 1;
    repeat (10) @(posedge sclk);
    for (int u = 0; u < 2; u++) begin
      checks++;
      if (accepted[u] != D) begin
        failures++;
        $display("fifo %0d accepted %0d words with the reader stopped, capacity %0d", u, accepted[u], D);
      end
    end
    rd_stop = 0;
    repeat (60) @(posedge sclk);
    for (int u = 0; u < 2; u++) begin
      checks += 3;
      if (got[u] != sent[u]) begin failures++; $display("fifo %0d: %0d written, %0d read", u, sent[u], got[u]); end
      if (n_full[u] == 0)    begin failures++; $display("fifo %0d never full", u); end
      if (n_empty[u] == 0)   begin failures++; $display("fifo %0d never empty", u); end
      $display("fifo %0d: %0d words, full cycles %0d, empty cycles %0d", u, got[u], n_full[u], n_empty[u]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
