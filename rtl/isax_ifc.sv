// isax_ifc: the custom-instruction (ISAX) interface of an analysis engine,
// placed in the Memory Access stage of the ucore pipeline.
//
// Placing queue instructions in MA (the first non-speculative stage) instead
// of after commit lets a destructive POP run without rollback and lets the
// result reach the next instruction through the normal bypass, so only an
// instruction that immediately uses the result waits one bubble.
//
// Request channel: a mini-decoder looks at the operation (funct3 of the
// custom instruction) and sends COUNT/TOP/POP/RECENT/PUSH to the queue
// controller (single cycle) and STAT_RD/STAT_WR to the status registers
// through an APB bridge (setup cycle, then access cycle).  Response channel:
// a multiplexer picks the queue or APB read data and drives it both to the
// MA/WB register (resp_*, towards commit) and to the EX-stage forwarding
// network (fwd_*), tagged with rd.  Requests and responses use separate
// wires (full duplex).
//
// An operation code outside the map retires without effect.
// Interface: the ucore holds req_* stable while stall is high.  Timing: queue
// operations respond in the cycle of the request (stall low unless PUSH meets
// a full output queue); status accesses stall one cycle and respond in the
// second.  STAT_RD reads register rs1, STAT_WR writes rs2 into register rs1.
// The opcode map and the two status operations are this design's own.
module isax_ifc
  import fireguard_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // from the ucore MA stage
  input  logic             req_valid,
  input  isax_op_e         req_op,
  input  logic [4:0]       req_rd,
  input  logic [XLEN-1:0]  req_rs1,
  input  logic [XLEN-1:0]  req_rs2,
  output logic             stall,
  // to MA/WB (commit) and to the EX forwarding muxes
  output logic             resp_valid,
  output logic [4:0]       resp_rd,
  output logic [XLEN-1:0]  resp_data,
  output logic             fwd_valid,
  output logic [4:0]       fwd_rd,
  output logic [XLEN-1:0]  fwd_data,
  // to MSQ_Ctrl
  output logic             ctl_valid,
  output isax_op_e         ctl_op,
  output logic [XLEN-1:0]  ctl_arg,
  input  logic [XLEN-1:0]  ctl_rdata,
  input  logic             ctl_busy,
  // APB master
  output logic             psel,
  output logic             penable,
  output logic             pwrite,
  output logic [3:0]       paddr,
  output logic [XLEN-1:0]  pwdata,
  input  logic [XLEN-1:0]  prdata,
  input  logic             pready
);
  typedef enum logic {APB_IDLE, APB_ACCESS} apb_state_e;
  apb_state_e state_q, state_d;

  logic is_stat, is_q, done;

  // mini-decoder
  assign is_stat = req_valid && (req_op == OP_STAT_RD || req_op == OP_STAT_WR);
  assign is_q    = req_valid && !is_stat && (req_op <= OP_PUSH);

  assign ctl_valid = is_q;
  assign ctl_op    = req_op;
  assign ctl_arg   = req_rs1;

  // APB bridge
  always_comb begin
    state_d = state_q;
    psel    = 1'b0;
    penable = 1'b0;
    unique case (state_q)
      APB_IDLE:   if (is_stat) begin
                    psel    = 1'b1;
                    state_d = APB_ACCESS;
                  end
      APB_ACCESS: begin
                    psel    = 1'b1;
                    penable = 1'b1;
                    if (pready) state_d = APB_IDLE;
                  end
    endcase
  end
  assign pwrite = (req_op == OP_STAT_WR);
  assign paddr  = req_rs1[3:0];
  assign pwdata = req_rs2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state_q <= APB_IDLE;
    else        state_q <= state_d;
  end

  // response multiplexer
  always_comb begin
    done      = 1'b0;
    resp_data = '0;
    if (is_q) begin
      done      = !ctl_busy;
      resp_data = ctl_rdata;
    end else if (is_stat && state_q == APB_ACCESS && pready) begin
      done      = 1'b1;
      resp_data = (req_op == OP_STAT_RD) ? prdata : '0;
    end else if (req_valid && !is_stat) begin
      done      = 1'b1;   // unknown operation: retire without effect
    end
    // PUSH and STAT_WR write no register
    resp_valid = done && (req_op != OP_PUSH) && (req_op != OP_STAT_WR);
  end

  assign stall     = req_valid && !done;
  assign resp_rd   = req_rd;
  assign fwd_valid = resp_valid;
  assign fwd_rd    = req_rd;
  assign fwd_data  = resp_data;

  a_apb_setup_first: assert property (@(posedge clk) disable iff (!rst_n)
    $rose(penable) |-> $past(psel) && !$past(penable));
endmodule
