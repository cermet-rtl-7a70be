// async_fifo -- dual-clock FIFO ("Sync FIFO" of the multi-clock option).
//
// Carries data units between the receiver's clock domain and the
// cryptographic core's clock domain when the two run at different speeds.
// The paper asks for "FIFO synchronizers, which use FIFOs to synchronize data
// being sent across clock domains" without giving their design; this is the
// usual construction: a DEPTH-entry memory written in the write domain and
// read in the read domain, binary pointers converted to Gray code, and each
// Gray pointer passed to the other domain through two flip-flops. full is
// computed in the write domain, empty in the read domain; both are
// conservative (they may stay set a few cycles longer than needed, never
// shorter).
//
// Interface: wr_en/wr_data are taken on a write-clock edge when full is low.
// rd_data shows the oldest entry while empty is low (first-word fall-through)
// and rd_en removes it at a read-clock edge. A written word becomes visible to
// the reader two or three read-clock edges later. DEPTH must be a power of two,
// at least 4.
module async_fifo #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 4
) (
  input  logic             wr_clk,
  input  logic             wr_rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_clk,
  input  logic             rd_rst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer seen in the write domain
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer seen in the read domain
  logic        do_wr, do_rd;
  logic [AW:0] wbin_nx, rbin_nx;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---- write domain ----
  assign full    = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign do_wr   = wr_en && !full;
  assign wbin_nx = wbin + (AW+1)'(do_wr);

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_nx;
      wgray    <= bin2gray(wbin_nx);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge wr_clk) begin
    if (do_wr) mem[wbin[AW-1:0]] <= wr_data;
  end

  // ---- read domain ----
  assign empty   = (rgray == wgray_r2);
  assign do_rd   = rd_en && !empty;
  assign rbin_nx = rbin + (AW+1)'(do_rd);
  assign rd_data = mem[rbin[AW-1:0]];

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_nx;
      rgray    <= bin2gray(rbin_nx);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  initial assert (DEPTH >= 4 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("DEPTH must be a power of two, at least 4");

endmodule
