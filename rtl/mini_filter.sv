// mini_filter: one lane of the superscalar event filter.
//
// A 1024-entry look-up table (the filter SRAM) is indexed by the committed
// instruction's {funct3, opcode[6:0]}, so 0x003 is lb and 0x023 is sb.  Each
// entry holds the GID of the instruction group (0 = not monitored) and the
// data path (DP_Sel) whose value is to be forwarded with it.
//
// Interface: the write port (config_*) programs one entry per cycle; the read
// port takes the commit lane of the ROB.  Timing: the table is a synchronous
// SRAM, so the GID and DP_Sel of an instruction retired in cycle t appear in
// cycle t+1, "the cycle following retirement", together with hit (GID != 0).
// The read enable is the commit valid; when no instruction commits the
// outputs read as GID 0.  A write and a read of the same entry in one cycle
// return the old contents.  The table resets to all-zero entries (nothing
// monitored) by clearing a valid bit per entry; this reset is this design's
// own choice.
module mini_filter
  import fireguard_pkg::*;
#(
  parameter int unsigned ENTRIES = 1 << FT_ADDR_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // configuration (WR IFC)
  input  logic                         cfg_we,
  input  logic [$clog2(ENTRIES)-1:0]   cfg_addr,
  input  ft_entry_t                    cfg_data,
  // lookup (RD IFC), driven by the ROB commit lane
  input  logic                         commit_valid,
  input  logic [INST_W-1:0]            commit_inst,
  // result, one cycle later
  output logic                         hit,
  output logic [GID_W-1:0]             gid,
  output dp_sel_e                      dp_sel
);
  localparam int unsigned AW = $clog2(ENTRIES);

  ft_entry_t         table_q [ENTRIES];
  logic [ENTRIES-1:0] entry_vld;
  logic [AW-1:0]     raddr;
  ft_entry_t         rdata_q;
  logic              ren_q, rvld_q;

  // {funct3, opcode} index
  assign raddr = AW'({commit_inst[14:12], commit_inst[6:0]});

  always_ff @(posedge clk) begin
    if (cfg_we) table_q[cfg_addr] <= cfg_data;
    if (commit_valid) rdata_q <= table_q[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      entry_vld <= '0;
      ren_q     <= 1'b0;
      rvld_q    <= 1'b0;
    end else begin
      if (cfg_we) entry_vld[cfg_addr] <= 1'b1;
      ren_q  <= commit_valid;
      rvld_q <= commit_valid && entry_vld[raddr];
    end
  end

  always_comb begin
    if (ren_q && rvld_q) begin
      gid    = rdata_q.gid;
      dp_sel = rdata_q.dp_sel;
    end else begin
      gid    = '0;
      dp_sel = DP_PRF;
    end
    hit = (gid != '0);
  end
endmodule
