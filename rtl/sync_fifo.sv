// sync_fifo -- single-clock first-in first-out buffer.
//
// Used for the per-channel input FIFOs, which hold received data units until
// the scheduler fetches them, and for the per-channel output FIFOs, which take
// the decoded units once a block has been unmixed. The paper draws these
// FIFOs but gives neither their depth nor their interface; this design uses a
// circular buffer of DEPTH entries with a valid/ready style write side and a
// first-word-fall-through read side (rd_data shows the oldest entry whenever
// empty is low).
//
// Timing: a word written at a clock edge is readable in the next cycle. A
// read and a write in the same cycle are both accepted, also when full
// (the read frees the slot). Reset empties the FIFO.
module sync_fifo #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;

  logic do_wr, do_rd;
  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_rd   = rd_en && !empty;
  assign do_wr   = wr_en && (!full || do_rd);
  assign rd_data = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= incr(wr_ptr);
      if (do_rd) rd_ptr <= incr(rd_ptr);
      count <= count + CW'(do_wr) - CW'(do_rd);
    end
  end

  // Storage has no reset: an entry is only read after it has been written.
  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  // The occupancy never exceeds the storage.
  assert property (@(posedge clk) count <= ($clog2(DEPTH+1))'(DEPTH));

endmodule
