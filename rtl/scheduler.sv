// scheduler -- fetch control and first-in first-out issue order.
//
// The matrix multiplication takes one data unit at a time, while units become
// ready in bursts: the plain channels' units as soon as their input FIFOs hold
// data, the encrypted channel's unit only when the cryptographic core has
// finished. The scheduler buffers these arrivals in a queue of channel
// indices and issues them to the multiplier in the order they arrived, as the
// paper describes ("a scheduler operating on a First-In-First-Out basis").
//
// Fetch: a channel's unit is fetched (load[j], one cycle) when it is available
// (avail[j]), the channel has no unit waiting, and the channel has not yet
// been fetched for the block now being gathered. Once every channel has been
// fetched for a block, fetching for the next block opens; thus all units of
// a block enter the queue before any unit of the next one, and the next
// block's plain units are fetched while the current block's encrypted unit is
// still in flight. Several channels fetched in one cycle enter the queue in
// channel order. These rules are this design's; the paper gives only the FIFO
// order and the overlap of fetch with processing (Fig. 5).
//
// Issue: the queue head is offered on issue_valid/issue_ch with issue_first
// and issue_last marking the first and the N_CH-th unit of a block, and leaves
// the queue when issue_ready is high in the same cycle.
module scheduler #(
  parameter int unsigned N_CH = 5,
  localparam int unsigned CHW = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int unsigned CW  = $clog2(N_CH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_CH-1:0]   avail,
  output logic [N_CH-1:0]   load,
  output logic              issue_valid,
  input  logic              issue_ready,
  output logic [CHW-1:0]    issue_ch,
  output logic              issue_first,
  output logic              issue_last
);
  logic [N_CH-1:0]           held_q;      // unit fetched, not yet issued
  logic [N_CH-1:0]           fetched_q;   // fetched for the block being gathered
  logic [CHW-1:0]            queue_q [N_CH];
  logic [CW-1:0]             count_q;
  logic [CHW-1:0]            issued_q;    // units of the current block issued

  logic          pop;
  logic [CHW-1:0] queue_nx [N_CH];
  logic [CW-1:0]  count_nx;
  logic [N_CH-1:0] held_nx;

  assign load        = avail & ~held_q & ~fetched_q;
  assign issue_valid = (count_q != '0);
  assign issue_ch    = queue_q[0];
  assign issue_first = (issued_q == '0);
  assign issue_last  = (issued_q == CHW'(N_CH - 1));
  assign pop         = issue_valid && issue_ready;

  always_comb begin
    queue_nx = queue_q;
    count_nx = count_q;
    held_nx  = held_q | load;
    if (pop) begin
      for (int unsigned i = 0; i + 1 < N_CH; i++) queue_nx[i] = queue_q[i+1];
      count_nx     = count_nx - 1'b1;
      held_nx[issue_ch] = 1'b0;
    end
    for (int unsigned j = 0; j < N_CH; j++) begin
      if (load[j]) begin
        queue_nx[count_nx[CHW-1:0]] = CHW'(j);
        count_nx = count_nx + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held_q    <= '0;
      fetched_q <= '0;
      count_q   <= '0;
      issued_q  <= '0;
      for (int unsigned i = 0; i < N_CH; i++) queue_q[i] <= '0;
    end else begin
      held_q   <= held_nx;
      queue_q  <= queue_nx;
      count_q  <= count_nx;
      if ((fetched_q | load) == '1) fetched_q <= '0;
      else                           fetched_q <= fetched_q | load;
      if (pop) issued_q <= issue_last ? '0 : issued_q + 1'b1;
    end
  end

  // At most one unit per channel waits, so the queue can never overflow.
  assert property (@(posedge clk) count_q <= CW'(N_CH));
  // A unit is only issued if its channel has one waiting.
  assert property (@(posedge clk) issue_valid |-> held_q[issue_ch]);

endmodule
