// mrd_matmul_parallel -- MRD code matrix multiplication, parallel
// architecture (A1).
//
// The receiver recovers the messages as M = H * X, where column k of X holds
// element k of every channel's data unit. Data units arrive one at a time: when
// unit D_i of channel i is selected, the selected-data matrix is zero except
// row i, so H times it is the outer product of column i of H with D_i. This
// block computes that outer product: N_CH x N_EL products H[j][i] * D_i[k]
// (j = output channel, k = element of the unit), one RPA multiplier each, all
// started together. The paper gives this structure (Fig. 6, A1) and the count
// of multipliers (256 for 16 channels of 256-bit data in GF(2^16)).
//
// The stored matrix H is the Moore matrix of cermet_pkg, computed at
// elaboration time. Element k of a unit is bits [k*M +: M].
//
// Interface and timing: in_valid/in_ready handshake with the channel index,
// the data unit and the block flags first/last, which travel with the unit.
// in_ready is high whenever the multipliers are idle. The products appear on
// prod_* with prod_valid high for one cycle MUL_CYCLES cycles after the accept
// cycle (2 in the paper). A new unit is accepted in the cycle prod_valid is
// high, so one unit is multiplied every MUL_CYCLES cycles. prod_mask marks the
// products that are valid; here all of them.
module mrd_matmul_parallel #(
  parameter int unsigned N_CH       = 5,
  parameter int unsigned M          = 16,
  parameter logic [M:0]  POLY       = 17'h1_100B,
  parameter int unsigned K_IN       = 128,
  parameter int unsigned MUL_CYCLES = 2,
  localparam int unsigned N_EL      = K_IN / M,
  localparam int unsigned CHW       = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  output logic                                in_ready,
  input  logic [CHW-1:0]                      in_ch,
  input  logic [K_IN-1:0]                     in_data,
  input  logic                                in_first,
  input  logic                                in_last,
  output logic                                prod_valid,
  output logic [N_CH-1:0][N_EL-1:0][M-1:0]    prod,
  output logic [N_CH-1:0][N_EL-1:0]           prod_mask,
  output logic                                prod_first,
  output logic                                prod_last
);
  typedef logic [N_CH-1:0][N_CH-1:0][M-1:0] hmat_t;

  function automatic hmat_t build_h();
    hmat_t h;
    for (int unsigned i = 0; i < N_CH; i++)
      for (int unsigned j = 0; j < N_CH; j++)
        h[i][j] = M'(cermet_pkg::h_entry(i, j, M, 32'(POLY)));
    return h;
  endfunction

  localparam hmat_t H = build_h();

  logic accept;
  logic [N_CH-1:0][N_EL-1:0] busy, done;

  assign accept   = in_valid && in_ready;
  assign in_ready = !busy[0][0];

  for (genvar j = 0; j < N_CH; j++) begin : g_row
    for (genvar k = 0; k < N_EL; k++) begin : g_el
      gf_mult_rpa #(.M(M), .POLY(POLY), .CYCLES(MUL_CYCLES)) u_mul (
        .clk   (clk),
        .rst_n (rst_n),
        .start (accept),
        .a     (H[j][in_ch]),
        .b     (in_data[k*M +: M]),
        .busy  (busy[j][k]),
        .done  (done[j][k]),
        .c     (prod[j][k])
      );
    end
  end

  // Block flags travel alongside the unit being multiplied.
  logic first_q, last_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_q <= 1'b0;
      last_q  <= 1'b0;
    end else if (accept) begin
      first_q <= in_first;
      last_q  <= in_last;
    end
  end

  assign prod_valid = done[0][0];
  assign prod_mask  = '1;
  assign prod_first = first_q;
  assign prod_last  = last_q;

  initial assert (N_CH <= M && K_IN % M == 0)
    else $error("need N_CH <= M and K_IN a multiple of M");

endmodule
