// crypto_cdc -- clock-domain crossing around the cryptographic core.
//
// In the paper's multi-clock option (Fig. 7) the cryptographic core and the
// rest of the receiver run on different clocks, and "Sync FIFOs" sit at the
// core's input and output. This block is that pair: one dual-clock FIFO
// carries ciphertext units from the receiver's domain (sys_clk) to the core's
// domain (core_clk), the other carries decrypted units back. Both sides keep
// the valid/ready handshakes of the single-clock design, so the receiver and
// the core connect to it exactly as they would to each other.
//
// Timing: a unit crosses each FIFO in two to three cycles of the receiving
// clock. DEPTH (a power of two, at least 4) bounds the units in flight in
// each direction.
module crypto_cdc #(
  parameter int unsigned K_IN  = 128,
  parameter int unsigned DEPTH = 4
) (
  // receiver side
  input  logic            sys_clk,
  input  logic            sys_rst_n,
  input  logic            sys_in_valid,
  output logic            sys_in_ready,
  input  logic [K_IN-1:0] sys_in_data,
  output logic            sys_out_valid,
  input  logic            sys_out_ready,
  output logic [K_IN-1:0] sys_out_data,
  // core side
  input  logic            core_clk,
  input  logic            core_rst_n,
  output logic            core_in_valid,
  input  logic            core_in_ready,
  output logic [K_IN-1:0] core_in_data,
  input  logic            core_out_valid,
  output logic            core_out_ready,
  input  logic [K_IN-1:0] core_out_data
);
  logic to_core_full, to_core_empty, to_sys_full, to_sys_empty;

  async_fifo #(.WIDTH(K_IN), .DEPTH(DEPTH)) u_to_core (
    .wr_clk   (sys_clk),
    .wr_rst_n (sys_rst_n),
    .wr_en    (sys_in_valid),
    .wr_data  (sys_in_data),
    .full     (to_core_full),
    .rd_clk   (core_clk),
    .rd_rst_n (core_rst_n),
    .rd_en    (core_in_ready),
    .rd_data  (core_in_data),
    .empty    (to_core_empty)
  );
  assign sys_in_ready  = !to_core_full;
  assign core_in_valid = !to_core_empty;

  async_fifo #(.WIDTH(K_IN), .DEPTH(DEPTH)) u_to_sys (
    .wr_clk   (core_clk),
    .wr_rst_n (core_rst_n),
    .wr_en    (core_out_valid),
    .wr_data  (core_out_data),
    .full     (to_sys_full),
    .rd_clk   (sys_clk),
    .rd_rst_n (sys_rst_n),
    .rd_en    (sys_out_ready),
    .rd_data  (sys_out_data),
    .empty    (to_sys_empty)
  );
  assign core_out_ready = !to_sys_full;
  assign sys_out_valid  = !to_sys_empty;

endmodule
