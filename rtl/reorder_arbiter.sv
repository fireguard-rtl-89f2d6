// reorder_arbiter: the FIFO queues and arbiter at the end of the event filter.
//
// The mini-filters produce up to LANES packets per cycle, but analysis is
// sensitive to program order, so they must leave one at a time in commit
// order.  Each lane has its own FIFO; a whole row (one packet slot per lane,
// invalid slots included) is pushed at once, so row k of every FIFO holds
// instructions retired in the same cycle and lane order inside a row is
// commit order.  The arbiter is a small state machine whose state is the lane
// pointer inside the head row: each cycle it sends the first valid packet at
// or after the pointer, skips invalid slots without spending a cycle, and
// pops the row from all FIFOs once no valid packet is left in it.  A row with
// no valid packet is popped in one cycle without output.
//
// Interface: row_push/row_valid/row_pkt in; out_valid/out_pkt with out_ready
// (valid/ready; out_pkt holds while out_valid && !out_ready).  row_ready says
// a row can be taken this cycle; almost_full says at most one free row is
// left, which the event filter uses to hold the core's commit one cycle early
// so the row already in flight always has room.
// Follows the paper: paired per-lane FIFOs of 16 entries, invalid packets
// kept as place holders, one cycle per valid packet.  Own choice: the lane
// pointer form of the state machine.
module reorder_arbiter
  import fireguard_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter int unsigned DEPTH = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    row_push,
  input  logic [LANES-1:0]        row_valid,
  input  fg_pkt_t [LANES-1:0]     row_pkt,
  output logic                    row_ready,
  output logic                    almost_full,
  output logic                    out_valid,
  output fg_pkt_t                 out_pkt,
  input  logic                    out_ready
);
  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [LANES-1:0]       head_valid;
  fg_pkt_t [LANES-1:0]    head_pkt;
  logic [LANES-1:0]       fifo_full, fifo_empty;
  logic [LANES-1:0][CW-1:0] fifo_count;
  logic                   row_pop;

  for (genvar g = 0; g < LANES; g++) begin : g_fifo
    logic [PKT_W:0] dout;
    fg_sync_fifo #(.WIDTH(PKT_W + 1), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .push  (row_push && row_ready),
      .din   ({row_valid[g], row_pkt[g]}),
      .pop   (row_pop),
      .dout  (dout),
      .full  (fifo_full[g]),
      .empty (fifo_empty[g]),
      .count (fifo_count[g])
    );
    assign head_valid[g] = dout[PKT_W];
    assign head_pkt[g]   = fg_pkt_t'(dout[PKT_W-1:0]);
  end

  // All lane FIFOs move together; lane 0 stands for the row
  assign row_ready   = !fifo_full[0];
  assign almost_full = (fifo_count[0] >= CW'(DEPTH - 1));

  // Arbiter state: next lane to look at in the head row
  logic [LW-1:0]   ptr_q;
  logic [LANES-1:0] cand, rest;
  logic [LW-1:0]   first;
  logic            found;

  always_comb begin
    cand  = '0;
    first = '0;
    found = 1'b0;
    rest  = '0;
    for (int i = 0; i < LANES; i++)
      cand[i] = !fifo_empty[0] && head_valid[i] && (LW'(i) >= ptr_q);
    for (int i = LANES - 1; i >= 0; i--)
      if (cand[i]) begin
        first = LW'(i);
        found = 1'b1;
      end
    for (int i = 0; i < LANES; i++)
      rest[i] = cand[i] && (LW'(i) > first);
    out_valid = found;
    out_pkt   = head_pkt[first];
    // pop the row once its last valid packet leaves, or if it has none
    row_pop   = !fifo_empty[0] && (found ? (out_ready && (rest == '0)) : 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 ptr_q <= '0;
    else if (row_pop)           ptr_q <= '0;
    else if (found && out_ready) ptr_q <= first + 1'b1;
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_pkt));
endmodule
