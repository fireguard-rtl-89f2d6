// msg_queues: the message queues of one analysis engine and their controller
// (MSQ_Ctrl), plus the engine's status registers behind an APB port.
//
// The input queue (DEPTH packets of 138 bits) is filled by the fabric with
// filtered packets and with packets routed from other engines.  The output
// queue (DEPTH flits) holds packets this engine pushes for other engines; its
// head is offered to the fabric's router.  MSQ_Ctrl executes the queue
// instructions of the kernel, one per cycle, combinationally:
//   COUNT  rd, rs1   occupancy of the input (rs1 = 0) or output (rs1 != 0) queue
//   TOP    rd, rs1   bits [rs1+63:rs1] of the input-queue head
//   POP    rd, rs1   same, and remove the head; the element is kept as "recent"
//   RECENT rd, rs1   bits [rs1+63:rs1] of the most recently popped element
//   PUSH   rs1       push rs1 (64 bits) towards engine STAT_DEST
// Bits above 137 read as zero.  TOP and POP on an empty queue return zero
// (POP then changes nothing and counts in STAT_DROPS); PUSH into a full
// output queue is refused with ctl_busy and must be retried.
//
// Status registers (APB, word index in paddr): 0 engine id, 1 input count,
// 2 output count, 3 push destination (read/write), 4 empty-pop count (write
// clears).  The APB slave has no wait states (pready = 1).
// Follows the paper: input/output queues of 32 entries, the five queue
// instructions and their bit-field semantics, status registers on APB.
// Own choices: the register map, queue selection by rs1 for COUNT, the
// empty/full behaviour and the destination register for PUSH.
module msg_queues
  import fireguard_pkg::*;
#(
  parameter int unsigned DEPTH   = 32,
  parameter int unsigned NODE_ID = 0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // fabric side
  input  logic                   iq_push,
  input  fg_pkt_t                iq_pkt,
  output logic                   iq_room,
  output logic                   oq_valid,
  output flit_t                  oq_flit,
  input  logic                   oq_pop,
  // MSQ_Ctrl port (from the ISAX interface)
  input  logic                   ctl_valid,
  input  isax_op_e               ctl_op,
  input  logic [XLEN-1:0]        ctl_arg,
  output logic [XLEN-1:0]        ctl_rdata,
  output logic                   ctl_busy,
  // APB slave for the status registers
  input  logic                   psel,
  input  logic                   penable,
  input  logic                   pwrite,
  input  logic [3:0]             paddr,
  input  logic [XLEN-1:0]        pwdata,
  output logic [XLEN-1:0]        prdata,
  output logic                   pready
);
  localparam int unsigned CW = $clog2(DEPTH+1);

  fg_pkt_t         iq_head;
  logic            iq_full, iq_empty, iq_pop;
  logic [CW-1:0]   iq_count;
  logic            oq_full, oq_empty, oq_push;
  logic [CW-1:0]   oq_count;
  flit_t           oq_din;

  fg_sync_fifo #(.WIDTH(PKT_W), .DEPTH(DEPTH)) u_iq (
    .clk, .rst_n,
    .push (iq_push && !iq_full), .din (iq_pkt),
    .pop  (iq_pop), .dout (iq_head),
    .full (iq_full), .empty (iq_empty), .count (iq_count)
  );

  fg_sync_fifo #(.WIDTH(FLIT_W), .DEPTH(DEPTH)) u_oq (
    .clk, .rst_n,
    .push (oq_push), .din (oq_din),
    .pop  (oq_pop && !oq_empty), .dout (oq_flit),
    .full (oq_full), .empty (oq_empty), .count (oq_count)
  );

  assign iq_room  = !iq_full;
  assign oq_valid = !oq_empty;

  fg_pkt_t         recent_q;
  logic [NODE_W-1:0] dest_q;
  logic [XLEN-1:0] drops_q;

  // bits [off+63:off] of a packet, zero above the top
  function automatic logic [XLEN-1:0] field(input fg_pkt_t p, input logic [XLEN-1:0] off);
    logic [PKT_W+XLEN-1:0] ext;
    ext = {{XLEN{1'b0}}, p};
    if (off >= XLEN'(PKT_W)) return '0;
    return ext[off[7:0] +: XLEN];
  endfunction

  // MSQ_Ctrl
  always_comb begin
    ctl_rdata = '0;
    ctl_busy  = 1'b0;
    iq_pop    = 1'b0;
    oq_push   = 1'b0;
    oq_din.dst  = dest_q;
    oq_din.src  = NODE_W'(NODE_ID);
    oq_din.data = ctl_arg;
    if (ctl_valid) begin
      unique case (ctl_op)
        OP_COUNT:  ctl_rdata = (ctl_arg == '0) ? XLEN'(iq_count) : XLEN'(oq_count);
        OP_TOP:    ctl_rdata = iq_empty ? '0 : field(iq_head, ctl_arg);
        OP_POP: begin
          ctl_rdata = iq_empty ? '0 : field(iq_head, ctl_arg);
          iq_pop    = !iq_empty;
        end
        OP_RECENT: ctl_rdata = field(recent_q, ctl_arg);
        OP_PUSH: begin
          oq_push  = !oq_full;
          ctl_busy = oq_full;
        end
        default: ;
      endcase
    end
  end

  // status registers
  logic apb_wr;
  assign apb_wr = psel && penable && pwrite;
  assign pready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      recent_q <= '0;
      dest_q   <= '0;
      drops_q  <= '0;
    end else begin
      if (iq_pop) recent_q <= iq_head;
      if (apb_wr && paddr == STAT_DEST)  dest_q <= pwdata[NODE_W-1:0];
      if (apb_wr && paddr == STAT_DROPS) drops_q <= '0;
      else if (ctl_valid && ctl_op == OP_POP && iq_empty) drops_q <= drops_q + 1'b1;
    end
  end

  always_comb begin
    unique case (paddr)
      STAT_ID:      prdata = XLEN'(NODE_ID);
      STAT_IN_CNT:  prdata = XLEN'(iq_count);
      STAT_OUT_CNT: prdata = XLEN'(oq_count);
      STAT_DEST:    prdata = XLEN'(dest_q);
      STAT_DROPS:   prdata = drops_q;
      default:      prdata = '0;
    endcase
  end

  a_apb_access: assert property (@(posedge clk) disable iff (!rst_n)
    penable |-> psel);
endmodule
