// event_filter: the superscalar event filter.
//
// One mini-filter sits on every commit lane, so all instructions retired in a
// cycle are checked in parallel and the filter never falls behind the core.
// Timing: cycle t, the ROB commit lanes address the mini-filter tables;
// cycle t+1, each mini-filter returns the GID and DP_Sel of its instruction,
// asks the data-forwarding channel for PRF data where DP_Sel selects it
// (prf_sel), picks the debug data of the chosen path (PRF, LDQ, STQ or FTQ)
// and encapsulates {debug data, PC, instruction, GID} into a 138-bit packet.
// The row of packets (irrelevant ones marked invalid) goes into the reorder
// FIFOs, and the arbiter sends the valid ones to the mapper in commit order,
// one per cycle.
//
// commit_stall asks the core to hold commit when the FIFOs have at most one
// free row: this is the back-pressure the filter exerts on the core.
// Own choices: every mini-filter table is written with the same entry (one
// configuration path shared by all lanes), and a row whose packets are all
// invalid is not pushed, since it carries no ordering information.
module event_filter
  import fireguard_pkg::*;
#(
  parameter int unsigned LANES      = 4,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // table configuration
  input  logic                           cfg_we,
  input  logic [FT_ADDR_W-1:0]           cfg_addr,
  input  ft_entry_t                      cfg_data,
  // commit lanes, cycle t
  input  logic [LANES-1:0]               commit_valid,
  input  logic [LANES-1:0][INST_W-1:0]   commit_inst,
  output logic                           commit_stall,
  // held lane contents and forwarded data, cycle t+1
  input  logic [LANES-1:0]               held_valid,
  input  logic [LANES-1:0][INST_W-1:0]   held_inst,
  input  logic [LANES-1:0][PC_W-1:0]     held_pc,
  output logic [LANES-1:0]               prf_sel,
  input  logic [LANES-1:0][XLEN-1:0]     fwd_prf_data,
  input  logic [LANES-1:0][XLEN-1:0]     fwd_ldq_data,
  input  logic [LANES-1:0][XLEN-1:0]     fwd_stq_data,
  input  logic [LANES-1:0][XLEN-1:0]     fwd_ftq_data,
  // packet stream to the mapper
  output logic                           pkt_valid,
  output fg_pkt_t                        pkt,
  input  logic                           pkt_ready
);
  logic    [LANES-1:0]            hit;
  logic    [LANES-1:0][GID_W-1:0] gid;
  dp_sel_e [LANES-1:0]            dp_sel;
  fg_pkt_t [LANES-1:0]            row_pkt;
  logic    [LANES-1:0]            row_valid;
  logic                           row_ready, almost_full;

  for (genvar g = 0; g < LANES; g++) begin : g_lane
    mini_filter u_mf (
      .clk, .rst_n,
      .cfg_we, .cfg_addr, .cfg_data,
      .commit_valid (commit_valid[g]),
      .commit_inst  (commit_inst[g]),
      .hit          (hit[g]),
      .gid          (gid[g]),
      .dp_sel       (dp_sel[g])
    );

    always_comb begin
      prf_sel[g]   = held_valid[g] && hit[g] && (dp_sel[g] == DP_PRF);
      row_valid[g] = held_valid[g] && hit[g];
      unique case (dp_sel[g])
        DP_PRF:  row_pkt[g].debug_data = fwd_prf_data[g];
        DP_LDQ:  row_pkt[g].debug_data = fwd_ldq_data[g];
        DP_STQ:  row_pkt[g].debug_data = fwd_stq_data[g];
        default: row_pkt[g].debug_data = fwd_ftq_data[g];
      endcase
      row_pkt[g].pc   = held_pc[g];
      row_pkt[g].inst = held_inst[g];
      row_pkt[g].gid  = gid[g];
    end
  end

  reorder_arbiter #(.LANES(LANES), .DEPTH(FIFO_DEPTH)) u_arb (
    .clk, .rst_n,
    .row_push    (|row_valid),
    .row_valid   (row_valid),
    .row_pkt     (row_pkt),
    .row_ready   (row_ready),
    .almost_full (almost_full),
    .out_valid   (pkt_valid),
    .out_pkt     (pkt),
    .out_ready   (pkt_ready)
  );

  assign commit_stall = almost_full;

  a_row_room: assert property (@(posedge clk) disable iff (!rst_n)
    (|row_valid) |-> row_ready);
endmodule
