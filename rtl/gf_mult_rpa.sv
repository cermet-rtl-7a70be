// gf_mult_rpa -- multi-cycle GF(2^M) multiplier using the Russian Peasant
// Algorithm (RPA).
//
// The RPA walks through the bits of b from the least significant end. In each
// step it adds (XORs) a into the product when the current bit of b is set,
// then doubles a (shift left) and reduces it by the field polynomial when the
// bit shifted out of position M-1 was set. After M steps the product
// c = a*b mod POLY is complete. The paper selects this method over log/exp
// look-up tables because it needs no tables.
//
// The paper states that one matrix multiplication takes 2 clock cycles. This
// module therefore holds one block of M/CYCLES RPA steps and uses it CYCLES
// times: in the start cycle on the operands, then on the registered partial
// state. The paper's early exit when b reaches zero is not needed: the
// remaining steps leave the product unchanged, so the latency is fixed.
//
// Interface: pulse start (accepted when busy is low) with a and b. The product
// c is valid, and done is high for one cycle, CYCLES cycles after the start
// cycle; c holds its value until the next product. A new start is accepted in
// the cycle done is high, so one multiplier completes a product every CYCLES
// cycles.
module gf_mult_rpa #(
  parameter int unsigned M      = 16,
  parameter logic [M:0]  POLY   = 17'h1_100B,
  parameter int unsigned CYCLES = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  output logic         busy,
  output logic         done,
  output logic [M-1:0] c
);
  localparam int unsigned STEPS = (M + CYCLES - 1) / CYCLES;
  localparam int unsigned CW    = (CYCLES > 1) ? $clog2(CYCLES) : 1;

  typedef struct packed {
    logic [M-1:0] a;
    logic [M-1:0] b;
    logic [M-1:0] c;
  } rpa_state_t;

  // One RPA iteration (Algorithm "Russian Peasant" in the paper's appendix).
  function automatic rpa_state_t rpa_step(input rpa_state_t s);
    rpa_state_t n;
    logic       highbit;
    n       = s;
    if (s.b[0]) n.c = s.c ^ s.a;
    highbit = s.a[M-1];
    n.a     = s.a << 1;
    n.b     = s.b >> 1;
    if (highbit) n.a = n.a ^ POLY[M-1:0];
    return n;
  endfunction

  rpa_state_t st_q, st_in, st_nx;
  logic [CW-1:0] left_q;       // step blocks still to run after this cycle
  logic          accept;

  assign busy   = (left_q != '0);
  assign accept = start && !busy;

  always_comb begin
    st_in = accept ? rpa_state_t'{a: a, b: b, c: '0} : st_q;
    st_nx = st_in;
    for (int unsigned s = 0; s < STEPS; s++) st_nx = rpa_step(st_nx);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= '0;
      left_q <= '0;
      done   <= 1'b0;
      c      <= '0;
    end else begin
      done <= 1'b0;
      if (accept || busy) begin
        st_q <= st_nx;
        if (accept) left_q <= CW'(CYCLES - 1);
        else        left_q <= left_q - 1'b1;
        if ((accept && CYCLES == 1) || (!accept && left_q == CW'(1))) begin
          c    <= st_nx.c;
          done <= 1'b1;
        end
      end
    end
  end

  initial assert (CYCLES >= 1 && CYCLES <= M) else $error("CYCLES must be in 1..M");

endmodule
