// fg_sync_fifo: single-clock first-in first-out queue with the head word
// visible combinationally (first-word fall-through).
//
// A circular array of DEPTH words with read and write pointers one bit wider
// than the index, so full and empty are told apart by the extra bit.  push
// writes din at the tail on the rising edge; pop discards the head.  A push
// while full and a pop while empty are ignored (and flagged by assertions).
// Push and pop in the same cycle are both honoured.  count is the occupancy.
module fg_sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           din,
  input  logic                       pop,
  output logic [WIDTH-1:0]           dout,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;
  logic             do_push, do_pop;

  assign do_push = push && (!full || pop);
  assign do_pop  = pop && !empty;

  function automatic logic [AW:0] bump(input logic [AW:0] p);
    logic [AW:0] n;
    if (p[AW-1:0] == AW'(DEPTH - 1)) n = {~p[AW], {AW{1'b0}}};
    else                             n = p + 1'b1;
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_push) wptr <= bump(wptr);
      if (do_pop)  rptr <= bump(rptr);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr[AW-1:0]] <= din;
  end

  assign empty = (wptr == rptr);
  assign full  = (wptr[AW] != rptr[AW]) && (wptr[AW-1:0] == rptr[AW-1:0]);
  assign dout  = mem[rptr[AW-1:0]];

  always_comb begin
    if (wptr[AW] == rptr[AW]) count = ($clog2(DEPTH+1))'(wptr[AW-1:0] - rptr[AW-1:0]);
    else                      count = ($clog2(DEPTH+1))'(int'(DEPTH) - int'(rptr[AW-1:0]) + int'(wptr[AW-1:0]));
  end

  // Overflow and underflow are caller bugs
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
