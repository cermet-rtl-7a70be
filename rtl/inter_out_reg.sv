// inter_out_reg -- intermediate output register of the unmixer.
//
// Because every received data unit contributes to every decoded message, the
// decoded block is only complete after all N_CH units of a block have been
// multiplied. This register holds the running sums: one GF(2^M) accumulator
// per (output channel j, element k). Addition in GF(2^M) is XOR. For each
// product marked in in_mask the accumulator is loaded with the product when
// the unit is the first of its block and XORed with it otherwise, so no clear
// cycle is needed between blocks.
//
// When the final product of a block arrives (in_last), the completed block is
// handed to the output FIFOs in the same cycle: out_valid is high for that
// cycle and out_data carries the accumulators with this last product already
// included. The paper gives the register's role and its one-cycle storage
// step; the load-on-first scheme and the same-cycle hand-off are this
// design's choices.
module inter_out_reg #(
  parameter int unsigned N_CH = 5,
  parameter int unsigned M    = 16,
  parameter int unsigned K_IN = 128,
  localparam int unsigned N_EL = K_IN / M
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             in_valid,
  input  logic [N_CH-1:0][N_EL-1:0][M-1:0] in_prod,
  input  logic [N_CH-1:0][N_EL-1:0]        in_mask,
  input  logic                             in_first,
  input  logic                             in_last,
  output logic                             out_valid,
  output logic [N_CH-1:0][K_IN-1:0]        out_data
);
  logic [N_CH-1:0][N_EL-1:0][M-1:0] acc_q, acc_nx;

  always_comb begin
    acc_nx = acc_q;
    for (int unsigned j = 0; j < N_CH; j++)
      for (int unsigned k = 0; k < N_EL; k++)
        if (in_mask[j][k])
          acc_nx[j][k] = in_first ? in_prod[j][k] : (acc_q[j][k] ^ in_prod[j][k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc_q <= '0;
    else if (in_valid) acc_q <= acc_nx;
  end

  assign out_valid = in_valid && in_last;
  assign out_data  = acc_nx;

endmodule
