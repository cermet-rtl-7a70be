// mrd_matmul_serial -- MRD code matrix multiplication, serial architecture
// (A2).
//
// Same arithmetic as mrd_matmul_parallel -- the outer product of column i of H
// with the selected data unit D_i -- but computed with a single RPA multiplier,
// one product H[j][i] * D_i[k] at a time. The paper proposes this for slow
// cryptographic cores such as ECC, where the multiplication has thousands of
// cycles to spare (Fig. 6, A2: 1 multiplier, 8192 cycles per operation for 16
// channels of 256-bit data, i.e. 2 cycles per product). The order in which the
// products are formed (rows j outer, elements k inner) is this design's
// choice; the paper does not give one.
//
// Interface and timing: in_valid/in_ready as in the parallel block; the unit
// and its flags are captured at the accept. Each product leaves on prod_* with
// a one-hot prod_mask marking its position (j,k); products come every
// MUL_CYCLES cycles, the first MUL_CYCLES cycles after the accept.
// prod_first is the unit's first flag on all its products; prod_last is set
// only on the final product of a unit flagged last. in_ready rises again in the
// cycle of the unit's final product, so back-to-back units take exactly
// MUL_CYCLES * N_CH * N_EL cycles each.
module mrd_matmul_serial #(
  parameter int unsigned N_CH       = 5,
  parameter int unsigned M          = 16,
  parameter logic [M:0]  POLY       = 17'h1_100B,
  parameter int unsigned K_IN       = 128,
  parameter int unsigned MUL_CYCLES = 2,
  localparam int unsigned N_EL      = K_IN / M,
  localparam int unsigned CHW       = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int unsigned ELW       = (N_EL > 1) ? $clog2(N_EL) : 1
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

  logic                active_q;        // a unit is being multiplied
  logic [CHW-1:0]      ch_q;
  logic [K_IN-1:0]     data_q;
  logic                first_q, last_q;
  logic [CHW-1:0]      j_q;             // position of the product in flight
  logic [ELW-1:0]      k_q;
  logic [CHW-1:0]      j_nx;            // position of the next product
  logic [ELW-1:0]      k_nx;

  logic          accept, final_el, mul_start, mul_busy, mul_done;
  logic [M-1:0]  mul_a, mul_b, mul_c;

  assign final_el  = (j_q == CHW'(N_CH - 1)) && (k_q == ELW'(N_EL - 1));
  assign in_ready  = !active_q || (mul_done && final_el);
  assign accept    = in_valid && in_ready;

  always_comb begin
    if (k_q == ELW'(N_EL - 1)) begin
      k_nx = '0;
      j_nx = j_q + 1'b1;
    end else begin
      k_nx = k_q + 1'b1;
      j_nx = j_q;
    end
  end

  assign mul_start = accept || (active_q && mul_done && !final_el);
  assign mul_a     = accept ? H[0][in_ch] : H[j_nx][ch_q];
  assign mul_b     = accept ? in_data[0 +: M] : data_q[k_nx*M +: M];

  gf_mult_rpa #(.M(M), .POLY(POLY), .CYCLES(MUL_CYCLES)) u_mul (
    .clk   (clk),
    .rst_n (rst_n),
    .start (mul_start),
    .a     (mul_a),
    .b     (mul_b),
    .busy  (mul_busy),
    .done  (mul_done),
    .c     (mul_c)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      ch_q     <= '0;
      data_q   <= '0;
      first_q  <= 1'b0;
      last_q   <= 1'b0;
      j_q      <= '0;
      k_q      <= '0;
    end else begin
      if (accept) begin
        active_q <= 1'b1;
        ch_q     <= in_ch;
        data_q   <= in_data;
        first_q  <= in_first;
        last_q   <= in_last;
        j_q      <= '0;
        k_q      <= '0;
      end else if (active_q && mul_done) begin
        if (final_el) active_q <= 1'b0;
        else begin
          j_q <= j_nx;
          k_q <= k_nx;
        end
      end
    end
  end

  // The single product is placed at its (j,k) position of the output array.
  always_comb begin
    prod      = '0;
    prod_mask = '0;
    prod[j_q][k_q]      = mul_c;
    prod_mask[j_q][k_q] = 1'b1;
  end

  assign prod_valid = active_q && mul_done;
  assign prod_first = first_q;
  assign prod_last  = last_q && final_el;

  // The multiplier is never started while it is still working.
  assert property (@(posedge clk) mul_start |-> !mul_busy);

  initial assert (N_CH <= M && K_IN % M == 0)
    else $error("need N_CH <= M and K_IN a multiple of M");

endmodule
