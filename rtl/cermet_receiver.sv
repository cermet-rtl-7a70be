// cermet_receiver -- receiver of the CERMET coded cryptosystem.
//
// The sender premixes n messages with an MRD code, X = G*M with G = H^-1 over
// GF(2^m), and encrypts only one of the n mixed channels. This receiver
// decrypts that one channel with an external cryptographic core, takes the
// other channels as they are, and unmixes M = H*X one received data unit at a
// time. Block diagram (paper Fig. 2), in data-flow order:
//
//   per-channel input FIFOs (sync_fifo)
//     -> channel ENC_CH: external cryptographic core (ports cc_*)
//     -> other channels: plain-data registers (data_select)
//   scheduler: fetches units and issues them in arrival order
//   multiplexer (data_select) -> MRD code matrix multiplication:
//     MUL_PARALLEL: mrd_matmul_parallel (A1), N_CH*K_IN/M RPA multipliers
//     MUL_SERIAL:   mrd_matmul_serial  (A2), one RPA multiplier
//   intermediate output register (inter_out_reg): XOR-accumulates the
//     products of the N_CH units of a block
//   per-channel output FIFOs (sync_fifo)
//
// The defaults are the configuration the paper reports most results for:
// 5 channels, 128-bit units (AES blocks) and GF(2^16) with the parallel
// multiplier. The paper's ECC configuration is N_CH=16, K_IN=256,
// MUL_ARCH=MUL_SERIAL. The SPI links in front of the input FIFOs and behind
// the output FIFOs are not modelled: each channel has a parallel valid/ready
// port instead.
//
// Interfaces (all valid/ready: a word moves in a cycle where both are high):
//   ch_in_*   one data unit per channel per block, written into its input FIFO
//   cc_in_*   ciphertext units of channel ENC_CH, towards the core
//   cc_out_*  decrypted units from the core; the core must hold cc_out_data
//             stable while cc_out_valid is high and cc_out_ready low
//   ch_out_*  decoded messages, one unit per channel per block; all channels
//             of a block are written to their output FIFOs in the same cycle
//
// Clocking: with CLK_DIV = 1 everything runs on clk and sys_clk is clk. With
// CLK_DIV > 1 (even) the paper's multi-clock option (Fig. 7) is built: the
// cryptographic core keeps clk, everything else in this module runs on
// sys_clk = clk / CLK_DIV from clock_divider, and two dual-clock FIFOs
// (crypto_cdc, CDC_DEPTH words each) carry the core traffic between the two.
// sys_clk is an output so the channel-side logic can use the same clock; the
// ch_* ports are synchronous to sys_clk, the cc_* ports to clk. The paper's
// text is ambiguous about which side gets the slower clock; this design
// follows Fig. 7, where the core keeps the original one. All flip-flops
// reset asynchronously on rst_n.
//
// Timing (parallel multiplier, MUL_CYCLES = 2): a fetched unit is multiplied
// in the two cycles after it is issued, accumulated in the third, and one unit
// is issued every two cycles, so a block needs 2*N_CH multiplier cycles. With
// a core of latency T_dec the steady-state block period is max(T_dec, 2*N_CH)
// cycles, as in the paper's Table I (17-cycle AES-256: 17 cycles up to 8
// channels, 2*N_CH beyond).
module cermet_receiver
  import cermet_pkg::*;
#(
  parameter int unsigned N_CH        = 5,
  parameter int unsigned M           = GF_M,
  parameter logic [M:0]  POLY        = (M+1)'(GF_POLY),
  parameter int unsigned K_IN        = 128,
  parameter int unsigned ENC_CH      = 0,
  parameter mul_arch_e   MUL_ARCH    = MUL_PARALLEL,
  parameter int unsigned MUL_CYCLES  = 2,
  parameter int unsigned IN_DEPTH    = 4,
  parameter int unsigned OUT_DEPTH   = 4,
  parameter int unsigned CLK_DIV     = 1,
  parameter int unsigned CDC_DEPTH   = 4,
  localparam int unsigned N_EL       = K_IN / M,
  localparam int unsigned CHW        = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  output logic                       sys_clk,
  // received channel data
  input  logic [N_CH-1:0]            ch_in_valid,
  output logic [N_CH-1:0]            ch_in_ready,
  input  logic [N_CH-1:0][K_IN-1:0]  ch_in_data,
  // cryptographic core, ciphertext side
  output logic                       cc_in_valid,
  input  logic                       cc_in_ready,
  output logic [K_IN-1:0]            cc_in_data,
  // cryptographic core, decrypted side
  input  logic                       cc_out_valid,
  output logic                       cc_out_ready,
  input  logic [K_IN-1:0]            cc_out_data,
  // decoded messages
  output logic [N_CH-1:0]            ch_out_valid,
  input  logic [N_CH-1:0]            ch_out_ready,
  output logic [N_CH-1:0][K_IN-1:0]  ch_out_data
);
  localparam int unsigned ICW = $clog2(IN_DEPTH + 1);
  localparam int unsigned OCW = $clog2(OUT_DEPTH + 1);

  // ---------------- clocking and the path to the cryptographic core ----------------
  // CLK_DIV = 1: one clock for everything; the core handshakes connect
  // straight to the cc_* ports. CLK_DIV > 1 (paper Fig. 7): the receiver runs
  // on clk / CLK_DIV, brought out on sys_clk, while the core stays on clk;
  // dual-clock FIFOs carry its input and output across.
  logic            rx_in_valid, rx_in_ready, rx_out_valid, rx_out_ready;
  logic [K_IN-1:0] rx_in_data, rx_out_data;

  if (CLK_DIV <= 1) begin : g_one_clock
    assign sys_clk      = clk;
    assign cc_in_valid  = rx_in_valid;
    assign rx_in_ready  = cc_in_ready;
    assign cc_in_data   = rx_in_data;
    assign rx_out_valid = cc_out_valid;
    assign cc_out_ready = rx_out_ready;
    assign rx_out_data  = cc_out_data;
  end else begin : g_two_clocks
    clock_divider #(.DIV(CLK_DIV)) u_div (
      .clk_in  (clk),
      .rst_n   (rst_n),
      .clk_out (sys_clk)
    );
    crypto_cdc #(.K_IN(K_IN), .DEPTH(CDC_DEPTH)) u_cdc (
      .sys_clk        (sys_clk),
      .sys_rst_n      (rst_n),
      .sys_in_valid   (rx_in_valid),
      .sys_in_ready   (rx_in_ready),
      .sys_in_data    (rx_in_data),
      .sys_out_valid  (rx_out_valid),
      .sys_out_ready  (rx_out_ready),
      .sys_out_data   (rx_out_data),
      .core_clk       (clk),
      .core_rst_n     (rst_n),
      .core_in_valid  (cc_in_valid),
      .core_in_ready  (cc_in_ready),
      .core_in_data   (cc_in_data),
      .core_out_valid (cc_out_valid),
      .core_out_ready (cc_out_ready),
      .core_out_data  (cc_out_data)
    );
  end

  // ---------------- input FIFOs ----------------
  logic [N_CH-1:0]           in_full, in_empty, in_pop;
  logic [N_CH-1:0][K_IN-1:0] in_head;
  logic [N_CH-1:0]           load, avail;

  for (genvar j = 0; j < N_CH; j++) begin : g_in
    logic [ICW-1:0] unused_count;
    sync_fifo #(.WIDTH(K_IN), .DEPTH(IN_DEPTH)) u_in_fifo (
      .clk     (sys_clk),
      .rst_n   (rst_n),
      .wr_en   (ch_in_valid[j] && ch_in_ready[j]),
      .wr_data (ch_in_data[j]),
      .full    (in_full[j]),
      .rd_en   (in_pop[j]),
      .rd_data (in_head[j]),
      .empty   (in_empty[j]),
      .count   (unused_count)
    );
    assign ch_in_ready[j] = !in_full[j];
    if (j == ENC_CH) begin : g_enc
      // The encrypted channel feeds the cryptographic core directly.
      assign in_pop[j] = rx_in_ready && !in_empty[j];
      assign avail[j]  = rx_out_valid;
    end else begin : g_plain
      assign in_pop[j] = load[j];
      assign avail[j]  = !in_empty[j];
    end
  end

  assign rx_in_valid = !in_empty[ENC_CH];
  assign rx_in_data  = in_head[ENC_CH];

  // ---------------- scheduler and data selection ----------------
  logic            iss_valid, iss_ready, iss_first, iss_last;
  logic [CHW-1:0]  iss_ch;
  logic [K_IN-1:0] sel_data;
  logic            mul_ready;
  logic [N_CH-1:0] out_full;

  scheduler #(.N_CH(N_CH)) u_sched (
    .clk         (sys_clk),
    .rst_n       (rst_n),
    .avail       (avail),
    .load        (load),
    .issue_valid (iss_valid),
    .issue_ready (iss_ready),
    .issue_ch    (iss_ch),
    .issue_first (iss_first),
    .issue_last  (iss_last)
  );

  // A block's last unit waits until every output FIFO has room for the
  // decoded block (the hand-off follows within MUL_CYCLES * N_CH * N_EL
  // cycles, before any further block can complete).
  assign iss_ready    = mul_ready && (!iss_last || out_full == '0);
  assign rx_out_ready = iss_valid && iss_ready && (iss_ch == CHW'(ENC_CH));

  data_select #(.N_CH(N_CH), .K_IN(K_IN), .ENC_CH(ENC_CH)) u_sel (
    .clk         (sys_clk),
    .rst_n       (rst_n),
    .load        (load),
    .fifo_data   (in_head),
    .crypto_data (rx_out_data),
    .sel         (iss_ch),
    .sel_data    (sel_data)
  );

  // ---------------- MRD code matrix multiplication ----------------
  logic                             prod_valid, prod_first, prod_last;
  logic [N_CH-1:0][N_EL-1:0][M-1:0] prod;
  logic [N_CH-1:0][N_EL-1:0]        prod_mask;

  if (MUL_ARCH == MUL_PARALLEL) begin : g_par
    mrd_matmul_parallel #(.N_CH(N_CH), .M(M), .POLY(POLY), .K_IN(K_IN),
                          .MUL_CYCLES(MUL_CYCLES)) u_mul (
      .clk        (sys_clk),
      .rst_n      (rst_n),
      .in_valid   (iss_valid && (!iss_last || out_full == '0)),
      .in_ready   (mul_ready),
      .in_ch      (iss_ch),
      .in_data    (sel_data),
      .in_first   (iss_first),
      .in_last    (iss_last),
      .prod_valid (prod_valid),
      .prod       (prod),
      .prod_mask  (prod_mask),
      .prod_first (prod_first),
      .prod_last  (prod_last)
    );
  end else begin : g_ser
    mrd_matmul_serial #(.N_CH(N_CH), .M(M), .POLY(POLY), .K_IN(K_IN),
                        .MUL_CYCLES(MUL_CYCLES)) u_mul (
      .clk        (sys_clk),
      .rst_n      (rst_n),
      .in_valid   (iss_valid && (!iss_last || out_full == '0)),
      .in_ready   (mul_ready),
      .in_ch      (iss_ch),
      .in_data    (sel_data),
      .in_first   (iss_first),
      .in_last    (iss_last),
      .prod_valid (prod_valid),
      .prod       (prod),
      .prod_mask  (prod_mask),
      .prod_first (prod_first),
      .prod_last  (prod_last)
    );
  end

  // ---------------- intermediate output register ----------------
  logic                      dec_valid;
  logic [N_CH-1:0][K_IN-1:0] dec_data;

  inter_out_reg #(.N_CH(N_CH), .M(M), .K_IN(K_IN)) u_ior (
    .clk       (sys_clk),
    .rst_n     (rst_n),
    .in_valid  (prod_valid),
    .in_prod   (prod),
    .in_mask   (prod_mask),
    .in_first  (prod_first),
    .in_last   (prod_last),
    .out_valid (dec_valid),
    .out_data  (dec_data)
  );

  // ---------------- output FIFOs ----------------
  for (genvar j = 0; j < N_CH; j++) begin : g_out
    logic           out_empty;
    logic [OCW-1:0] unused_count;
    sync_fifo #(.WIDTH(K_IN), .DEPTH(OUT_DEPTH)) u_out_fifo (
      .clk     (sys_clk),
      .rst_n   (rst_n),
      .wr_en   (dec_valid),
      .wr_data (dec_data[j]),
      .full    (out_full[j]),
      .rd_en   (ch_out_ready[j]),
      .rd_data (ch_out_data[j]),
      .empty   (out_empty),
      .count   (unused_count)
    );
    assign ch_out_valid[j] = !out_empty;
  end

  // A decoded block is never dropped at a full output FIFO.
  assert property (@(posedge sys_clk) dec_valid |-> (out_full == '0));

  initial assert (ENC_CH < N_CH && N_CH <= M && K_IN % M == 0)
    else $error("need ENC_CH < N_CH <= M and K_IN a multiple of M");

endmodule
