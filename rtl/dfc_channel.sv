// dfc_channel: the buffer-free data-forwarding channel inside the main core.
//
// It hooks every ROB commit lane.  In the commit cycle t the instruction word
// goes straight to the mini-filter of its lane (outside this module) while
// the PC, instruction and the physical-register index of the retired
// instruction are kept in one address register per lane (ADDR_PR).  In cycle
// t+1 the filter answers with prf_sel[x] when lane x wants register-file
// data.  Read controller x of the PRF is statically multiplexed between the
// issue queue and mini-filter x, and the filter side wins: the PRF read port
// is given ADDR_PR[x], the issue-queue request on that port is refused for
// this cycle (iq_stall[x]) and must retry next cycle, and the read data is
// returned as fwd_prf_data[x] in the same cycle.  Load, store and jump
// addresses need no preemption: the core presents the tops of the LDQ, STQ
// and FTQ for the instructions retired in t during cycle t+1, and they are
// carried to the filter unchanged.
//
// Follows the paper: the per-lane address registers, port x reserved to
// lane x with priority over the issue queue, contention only on that port.
// Own choices: one PRF index per instruction (the register holding the value
// to forward), a combinational PRF read, NUM_RD_PORTS = 4 read ports.
module dfc_channel
  import fireguard_pkg::*;
#(
  parameter int unsigned LANES        = 4,
  parameter int unsigned NUM_RD_PORTS = 4
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // ROB commit lanes, cycle t
  input  logic [LANES-1:0]                     commit_valid,
  input  logic [LANES-1:0][INST_W-1:0]         commit_inst,
  input  logic [LANES-1:0][PC_W-1:0]           commit_pc,
  input  logic [LANES-1:0][PRF_IDX_W-1:0]      commit_prf_idx,
  // held lane contents, cycle t+1
  output logic [LANES-1:0]                     held_valid,
  output logic [LANES-1:0][INST_W-1:0]         held_inst,
  output logic [LANES-1:0][PC_W-1:0]           held_pc,
  // filter control, cycle t+1
  input  logic [LANES-1:0]                     prf_sel,
  // issue-queue side of the PRF read controllers
  input  logic [NUM_RD_PORTS-1:0]              iq_ren,
  input  logic [NUM_RD_PORTS-1:0][PRF_IDX_W-1:0] iq_raddr,
  output logic [NUM_RD_PORTS-1:0]              iq_stall,
  output logic [NUM_RD_PORTS-1:0][XLEN-1:0]    iq_rdata,
  // PRF read ports
  output logic [NUM_RD_PORTS-1:0]              prf_ren,
  output logic [NUM_RD_PORTS-1:0][PRF_IDX_W-1:0] prf_raddr,
  input  logic [NUM_RD_PORTS-1:0][XLEN-1:0]    prf_rdata,
  // queue tops, cycle t+1
  input  logic [LANES-1:0][XLEN-1:0]           ldq_top,
  input  logic [LANES-1:0][XLEN-1:0]           stq_top,
  input  logic [LANES-1:0][XLEN-1:0]           ftq_top,
  // forwarded data to the filter, cycle t+1
  output logic [LANES-1:0][XLEN-1:0]           fwd_prf_data,
  output logic [LANES-1:0][XLEN-1:0]           fwd_ldq_data,
  output logic [LANES-1:0][XLEN-1:0]           fwd_stq_data,
  output logic [LANES-1:0][XLEN-1:0]           fwd_ftq_data
);
  // ADDR_PR and the held lane contents
  logic [LANES-1:0][PRF_IDX_W-1:0] addr_pr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) held_valid <= '0;
    else        held_valid <= commit_valid;
  end

  always_ff @(posedge clk) begin
    for (int x = 0; x < LANES; x++) begin
      if (commit_valid[x]) begin
        addr_pr[x]   <= commit_prf_idx[x];
        held_inst[x] <= commit_inst[x];
        held_pc[x]   <= commit_pc[x];
      end
    end
  end

  // Read controller multiplexing: lane x preempts port x
  logic [NUM_RD_PORTS-1:0] pre;

  always_comb begin
    pre = '0;
    for (int x = 0; x < LANES; x++) pre[x] = prf_sel[x] && held_valid[x];
    for (int p = 0; p < NUM_RD_PORTS; p++) begin
      prf_ren[p]   = pre[p] || iq_ren[p];
      prf_raddr[p] = pre[p] ? addr_pr[p] : iq_raddr[p];
      iq_stall[p]  = pre[p] && iq_ren[p];
      iq_rdata[p]  = prf_rdata[p];
    end
    for (int x = 0; x < LANES; x++) begin
      fwd_prf_data[x] = prf_rdata[x];
      fwd_ldq_data[x] = ldq_top[x];
      fwd_stq_data[x] = stq_top[x];
      fwd_ftq_data[x] = ftq_top[x];
    end
  end

  initial begin
    assert (NUM_RD_PORTS >= LANES)
      else $error("dfc_channel: each commit lane needs its own PRF read port");
  end
endmodule
