// cermet_harness -- end-to-end test bench body for the CERMET receiver.
//
// Plays the sender: for each block it draws N_CH random messages, mixes them
// with G = H^-1 over GF(2^16) (computed here by Gauss-Jordan elimination, not
// taken from the design), encrypts the mixed unit of channel ENC_CH with the
// stand-in cipher of crypto_core_model and queues one unit per channel. The
// receiver, with crypto_core_model attached as its core, must return the
// original messages on every output channel, in order.
//
// Phase 1 (first half of the blocks) feeds the inputs as fast as they are
// accepted and drains the outputs at once; it checks the steady-state block
// period against max(T_dec, multiplier cycles per block): max(LAT, 2*N_CH) for
// the parallel multiplier, max(LAT, 2*N_CH*N_CH*K_IN/16) for the serial one.
// Phase 2 inserts random input gaps and output stalls. The mechanisms of the
// design are counted and each must occur: plain units multiplied, decrypted
// units multiplied, multiplication overlapping decryption, the next block's
// plain units fetched before the current block's decrypted unit is issued,
// output back-pressure holding a block's last unit, and full input FIFOs.
//
// With CLK_DIV > 1 the receiver runs on clk / CLK_DIV (sys_clk) and the
// core on clk; the block period is counted in sys_clk cycles and checked
// when the multiplier, not the core, sets it.
//
// USE_DEFAULTS instantiates the receiver with no parameter list at all (its
// defaults must then match N_CH, K_IN and MUL_ARCH here).
module cermet_harness #(
  parameter string       NAME         = "default",
  parameter bit          USE_DEFAULTS = 1'b1,
  parameter int unsigned N_CH         = 5,
  parameter int unsigned K_IN         = 128,
  parameter cermet_pkg::mul_arch_e MUL_ARCH = cermet_pkg::MUL_PARALLEL,
  parameter int unsigned LAT          = 17,
  parameter int unsigned BLOCKS       = 40,
  parameter int unsigned CLK_DIV      = 1
) (
  input  logic clk,
  input  logic rst_n,
  output bit   done,
  output int   checks,
  output int   failures
);
  import tb_gf_ref_pkg::*;

  localparam int unsigned M     = 16;
  localparam logic [31:0] POLY  = 32'h1100B;
  localparam int unsigned NE    = K_IN / M;
  localparam int unsigned ENC   = 0;
  localparam int unsigned MC    = 2;
  localparam int unsigned MULBLK = (MUL_ARCH == cermet_pkg::MUL_PARALLEL) ? MC * N_CH
                                                                          : MC * N_CH * N_CH * NE;
  // core latency counted in receiver (sys_clk) cycles
  localparam int unsigned LAT_SYS = (LAT + CLK_DIV - 1) / CLK_DIV;
  localparam int unsigned PERIOD = (LAT_SYS > MULBLK) ? LAT_SYS : MULBLK;
  // Across two clocks the core-bound period jitters by a cycle, so it is
  // only checked exactly when the multiplier is the bottleneck.
  localparam bit CHECK_PERIOD = (CLK_DIV <= 1) || (MULBLK > LAT_SYS);
  // phase 2 drains each output about once per OUT_SLOW cycles, slower than
  // blocks are decoded, so the output FIFOs fill up
  localparam int unsigned OUT_SLOW = 4 * PERIOD;

  logic [N_CH-1:0]            ch_in_valid, ch_in_ready, ch_out_valid, ch_out_ready;
  logic [N_CH-1:0][K_IN-1:0]  ch_in_data, ch_out_data;
  logic                       sys_clk;
  logic                       cc_in_valid, cc_in_ready, cc_out_valid, cc_out_ready;
  logic [K_IN-1:0]            cc_in_data, cc_out_data;

  if (USE_DEFAULTS) begin : g_dut
    cermet_receiver u_dut (.*);
  end else begin : g_dut
    cermet_receiver #(.N_CH(N_CH), .K_IN(K_IN), .MUL_ARCH(MUL_ARCH), .CLK_DIV(CLK_DIV)) u_dut (.*);
  end

  crypto_core_model #(.K_IN(K_IN), .LAT(LAT)) u_core (
    .clk, .rst_n,
    .in_valid (cc_in_valid), .in_ready (cc_in_ready), .in_data (cc_in_data),
    .out_valid(cc_out_valid), .out_ready(cc_out_ready), .out_data(cc_out_data));

  // ---- stand-in cipher, the inverse of crypto_core_model's dec() ----
  function automatic logic [K_IN-1:0] key();
    logic [K_IN-1:0] k;
    for (int i = 0; i < int'(K_IN); i++) k[i] = ((i * 37 + 11) % 5) < 2;
    return k;
  endfunction
  function automatic logic [K_IN-1:0] enc(input logic [K_IN-1:0] x);
    logic [K_IN-1:0] r;
    r = x ^ key();
    return (r << 7) | (r >> (K_IN - 7));
  endfunction

  // ---- sender ----
  logic [K_IN-1:0] msg  [BLOCKS][N_CH];
  logic [K_IN-1:0] sent [BLOCKS][N_CH];
  mat_t H, G;

  task automatic make_blocks();
    bit ok;
    H = ref_h(N_CH, M, POLY);
    G = ref_matinv(H, N_CH, M, POLY, ok);
    checks++;
    if (!ok) begin failures++; $display("[%s] H is singular", NAME); end
    for (int b = 0; b < int'(BLOCKS); b++) begin
      for (int j = 0; j < int'(N_CH); j++)
        for (int w = 0; w < int'(K_IN) / 32; w++) msg[b][j][w*32 +: 32] = $urandom;
      for (int i = 0; i < int'(N_CH); i++) begin
        logic [K_IN-1:0] x;
        x = '0;
        for (int k = 0; k < int'(NE); k++) begin
          logic [31:0] s;
          s = 0;
          for (int j = 0; j < int'(N_CH); j++)
            s = s ^ ref_mul(G[i][j], 32'(msg[b][j][k*M +: M]), M, POLY);
          x[k*M +: M] = s[M-1:0];
        end
        sent[b][i] = (i == int'(ENC)) ? enc(x) : x;
      end
    end
  endtask

  // ---- drivers and monitors ----
  bit phase2 = 0, started = 0;
  int in_idx  [N_CH];
  int out_idx [N_CH];
  int cyc = 0;
  int dec_times [$];

  // mechanism counters
  int n_plain = 0, n_dec = 0, n_overlap = 0, n_prefetch = 0, n_out_stall = 0, n_in_full = 0;

  always @(posedge sys_clk) begin
    cyc <= cyc + 1;
    if (rst_n && started) begin
      for (int j = 0; j < int'(N_CH); j++) begin
        if (ch_in_valid[j] && ch_in_ready[j]) in_idx[j]++;
        if (ch_out_valid[j] && ch_out_ready[j]) begin
          checks++;
          if (out_idx[j] >= int'(BLOCKS)) begin failures++; $display("[%s] extra output", NAME); end
          else if (ch_out_data[j] != msg[out_idx[j]][j]) begin
            failures++;
            $display("[%s] block %0d ch %0d got %h exp %h", NAME, out_idx[j], j, ch_out_data[j], msg[out_idx[j]][j]);
          end
          out_idx[j]++;
        end
      end
      for (int j = 0; j < int'(N_CH); j++) begin
        int nx;
        nx = in_idx[j];   // already advanced above for an accept in this cycle
        ch_in_valid[j] <= (nx < int'(BLOCKS)) && (!phase2 || ($urandom % 4 != 0));
        ch_in_data[j]  <= (nx < int'(BLOCKS)) ? sent[nx][j] : '0;
        ch_out_ready[j] <= !phase2 || ($urandom % OUT_SLOW == 0);
      end
    end
  end

  always @(negedge sys_clk) if (rst_n && started) begin
    if (g_dut.u_dut.iss_valid && g_dut.u_dut.iss_ready) begin
      if (g_dut.u_dut.iss_ch == ENC) n_dec++;
      else                           n_plain++;
    end
    if (!g_dut.u_dut.mul_ready && u_core.busy_q) n_overlap++;
    if ((g_dut.u_dut.load & ~(N_CH'(1) << ENC)) != 0 && g_dut.u_dut.u_sched.held_q[ENC]) n_prefetch++;
    if (g_dut.u_dut.iss_valid && g_dut.u_dut.iss_last && g_dut.u_dut.mul_ready &&
        g_dut.u_dut.out_full != '0) n_out_stall++;
    if ((ch_in_valid & ~ch_in_ready) != 0) n_in_full++;
    if (g_dut.u_dut.dec_valid && !phase2) dec_times.push_back(cyc);
  end

  initial begin
    done = 0; checks = 0; failures = 0;
    ch_in_valid = '0; ch_in_data = '0; ch_out_ready = '0;
    for (int j = 0; j < int'(N_CH); j++) begin in_idx[j] = 0; out_idx[j] = 0; end
    make_blocks();
    wait (rst_n);
    @(posedge sys_clk);
    started = 1;
    // phase 1: full rate until half the blocks are out
    wait (out_idx[N_CH-1] >= int'(BLOCKS) / 2);
    phase2 = 1;
    for (int j = 0; j < int'(N_CH); j++) wait (out_idx[j] >= int'(BLOCKS));
    repeat (10) @(posedge sys_clk);
    for (int j = 0; j < int'(N_CH); j++) begin
      checks++;
      if (out_idx[j] != int'(BLOCKS)) begin failures++; $display("[%s] ch %0d gave %0d blocks", NAME, j, out_idx[j]); end
    end
    // throughput: steady-state spacing of decoded blocks in phase 1
    begin
      int nper, bad;
      nper = 0; bad = 0;
      for (int i = 4; i < dec_times.size(); i++) begin
        nper++;
        if (dec_times[i] - dec_times[i-1] != int'(PERIOD)) begin
          bad++;
          if (bad < 4) $display("[%s] block period %0d, expected %0d", NAME, dec_times[i] - dec_times[i-1], PERIOD);
        end
      end
      checks++;
      if (!CHECK_PERIOD) bad = 0;
      if (nper < 3 || bad != 0) begin failures++; $display("[%s] period check: %0d periods, %0d wrong", NAME, nper, bad); end
      $display("[%s] %0d channels x %0d bits, period %0d receiver cycles/block, core clock = %0d x receiver clock (%0d bits/cycle x1000 = %0d)",
               NAME, N_CH, K_IN, PERIOD, CLK_DIV, N_CH * K_IN, (N_CH * K_IN * 1000) / PERIOD);
    end
    $display("[%s] plain units %0d, decrypted units %0d, mult-during-decrypt cycles %0d, early plain fetches %0d, output stalls %0d, input-full cycles %0d",
             NAME, n_plain, n_dec, n_overlap, n_prefetch, n_out_stall, n_in_full);
    checks += 6;
    if (n_plain == 0)     begin failures++; $display("[%s] no plain unit multiplied", NAME); end
    if (n_dec == 0)       begin failures++; $display("[%s] no decrypted unit multiplied", NAME); end
    if (n_overlap == 0)   begin failures++; $display("[%s] multiplication never overlapped decryption", NAME); end
    if (n_prefetch == 0)  begin failures++; $display("[%s] next block never fetched early", NAME); end
    if (n_out_stall == 0) begin failures++; $display("[%s] output back-pressure never happened", NAME); end
    if (n_in_full == 0)   begin failures++; $display("[%s] input FIFOs never filled", NAME); end
    done = 1;
  end
endmodule
