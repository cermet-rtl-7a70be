// crypto_core_model -- behavioural stand-in for the cryptographic core.
//
// Not synthesizable logic and not a cipher: the receiver leaves the core
// (AES-256 or Curve25519) outside, and this model lets the testbenches close
// the loop. It takes one K_IN-bit unit on in_valid/in_ready, keeps it for LAT
// cycles and then presents dec(unit) on out_valid/out_data until out_ready.
// dec() undoes the stand-in enc() below: a XOR with a fixed key pattern and a
// rotation. Like a fully iterative core it decrypts one unit at a time, but it
// accepts the next unit in the cycle its result moves to the output, so with
// a consumer that keeps up it delivers one unit every LAT cycles (17 for the
// AES-256 core the paper uses).
module crypto_core_model #(
  parameter int unsigned K_IN = 128,
  parameter int unsigned LAT  = 17
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [K_IN-1:0] in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [K_IN-1:0] out_data
);
  localparam int unsigned ROT = 7;

  function automatic logic [K_IN-1:0] key();
    logic [K_IN-1:0] k;
    for (int i = 0; i < int'(K_IN); i++) k[i] = ((i * 37 + 11) % 5) < 2;
    return k;
  endfunction

  function automatic logic [K_IN-1:0] dec(input logic [K_IN-1:0] y);
    logic [K_IN-1:0] r;
    r = (y >> ROT) | (y << (K_IN - ROT));
    return r ^ key();
  endfunction

  logic            busy_q;
  int unsigned     cnt_q;
  logic [K_IN-1:0] work_q;
  logic            finish;

  assign finish   = busy_q && (cnt_q == LAT - 1) && (!out_valid || out_ready);
  assign in_ready = !busy_q || finish;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q    <= 1'b0;
      cnt_q     <= 0;
      work_q    <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (busy_q && cnt_q < LAT - 1) cnt_q <= cnt_q + 1;
      if (finish) begin
        out_valid <= 1'b1;
        out_data  <= dec(work_q);
        busy_q    <= 1'b0;
      end
      if (in_valid && in_ready) begin
        busy_q <= 1'b1;
        cnt_q  <= 0;
        work_q <= in_data;
      end
    end
  end

endmodule
