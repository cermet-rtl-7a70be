// data_select -- plain-data registers and the selection multiplexer.
//
// Unencrypted channels bypass the cryptographic core: when the scheduler
// fetches a unit of a plain channel from its input FIFO (load[j]) it is stored
// in that channel's register. The encrypted channel ENC_CH has no register
// here: its unit is the cryptographic core's output, held there until taken.
// The multiplexer then passes the unit of the channel the scheduler selects
// (sel) on to the matrix multiplication. This follows the "Register" and "MUX"
// boxes of the paper's receiver figure.
//
// Timing: a unit loaded at a clock edge can be selected from the next cycle.
// sel_data is combinational in sel.
module data_select #(
  parameter int unsigned N_CH   = 5,
  parameter int unsigned K_IN   = 128,
  parameter int unsigned ENC_CH = 0,
  localparam int unsigned CHW   = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N_CH-1:0]            load,
  input  logic [N_CH-1:0][K_IN-1:0]  fifo_data,
  input  logic [K_IN-1:0]            crypto_data,
  input  logic [CHW-1:0]             sel,
  output logic [K_IN-1:0]            sel_data
);
  logic [N_CH-1:0][K_IN-1:0] plain_q;

  for (genvar j = 0; j < N_CH; j++) begin : g_reg
    if (j == ENC_CH) begin : g_enc
      assign plain_q[j] = crypto_data;
    end else begin : g_plain
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)       plain_q[j] <= '0;
        else if (load[j]) plain_q[j] <= fifo_data[j];
      end
    end
  end

  assign sel_data = plain_q[sel];

endmodule
