// fireguard_top: the FireGuard monitoring fabric between an out-of-order main
// core and its analysis engines.
//
// Core clock domain (clk_core): the data-forwarding channel taps the ROB
// commit lanes and the PRF read ports, the event filter selects relevant
// instructions and packs them, and the allocator picks target engines.  Each
// engine has an 8-entry crossing queue into the analysis clock domain
// (clk_ae), where the fabric delivers packets into the engine's message
// queues and routes engine-to-engine packets over a mesh; an ISAX interface
// per engine gives the ucore its queue instructions.
//
// The main core and the ucores are outside this module: the commit lanes,
// PRF read ports, queue tops and commit_stall go to the core; one ISAX
// request/response port per engine goes to its ucore (or to a hardware
// accelerator using the same port).  Configuration ports program the filter
// tables, the distributor's SE_Bitmaps and the scheduling engines; in the
// paper these are written by privileged software, here they are plain
// write ports in the core clock domain.
//
// Latency of a monitored instruction, uncontended: commit in cycle t, filter
// and data selection in t+1, FIFO/arbiter from t+2, allocator stage one
// cycle later, then the crossing queue (2-3 analysis clocks) and one analysis
// clock for the fabric into the input queue.
module fireguard_top
  import fireguard_pkg::*;
#(
  parameter int unsigned LANES        = 4,
  parameter int unsigned NUM_RD_PORTS = 4,
  parameter int unsigned FIFO_DEPTH   = 16,
  parameter int unsigned NUM_SE       = 4,
  parameter int unsigned NUM_AE       = 4,
  parameter int unsigned MESH_X       = 2,
  parameter int unsigned CDC_DEPTH    = 8,
  parameter int unsigned MSQ_DEPTH    = 32
) (
  input  logic                                   clk_core,
  input  logic                                   rst_core_n,
  input  logic                                   clk_ae,
  input  logic                                   rst_ae_n,
  // configuration (core domain)
  input  logic                                   cfg_ft_we,
  input  logic [FT_ADDR_W-1:0]                   cfg_ft_addr,
  input  ft_entry_t                              cfg_ft_data,
  input  logic                                   cfg_dist_we,
  input  logic [GID_W-1:0]                       cfg_dist_gid,
  input  logic [NUM_SE-1:0]                      cfg_dist_se_bitmap,
  input  logic [NUM_SE-1:0]                      cfg_se_we,
  input  sched_pol_e                             cfg_se_policy,
  input  logic [NUM_AE-1:0]                      cfg_se_members,
  // main core: ROB commit lanes
  input  logic [LANES-1:0]                       commit_valid,
  input  logic [LANES-1:0][INST_W-1:0]           commit_inst,
  input  logic [LANES-1:0][PC_W-1:0]             commit_pc,
  input  logic [LANES-1:0][PRF_IDX_W-1:0]        commit_prf_idx,
  output logic                                   commit_stall,
  // main core: PRF read controllers
  input  logic [NUM_RD_PORTS-1:0]                iq_ren,
  input  logic [NUM_RD_PORTS-1:0][PRF_IDX_W-1:0] iq_raddr,
  output logic [NUM_RD_PORTS-1:0]                iq_stall,
  output logic [NUM_RD_PORTS-1:0][XLEN-1:0]      iq_rdata,
  output logic [NUM_RD_PORTS-1:0]                prf_ren,
  output logic [NUM_RD_PORTS-1:0][PRF_IDX_W-1:0] prf_raddr,
  input  logic [NUM_RD_PORTS-1:0][XLEN-1:0]      prf_rdata,
  // main core: queue tops of the instructions retired in the previous cycle
  input  logic [LANES-1:0][XLEN-1:0]             ldq_top,
  input  logic [LANES-1:0][XLEN-1:0]             stq_top,
  input  logic [LANES-1:0][XLEN-1:0]             ftq_top,
  // ucores (analysis domain): ISAX ports
  input  logic     [NUM_AE-1:0]                  isax_req_valid,
  input  isax_op_e [NUM_AE-1:0]                  isax_req_op,
  input  logic     [NUM_AE-1:0][4:0]             isax_req_rd,
  input  logic     [NUM_AE-1:0][XLEN-1:0]        isax_req_rs1,
  input  logic     [NUM_AE-1:0][XLEN-1:0]        isax_req_rs2,
  output logic     [NUM_AE-1:0]                  isax_stall,
  output logic     [NUM_AE-1:0]                  isax_resp_valid,
  output logic     [NUM_AE-1:0][4:0]             isax_resp_rd,
  output logic     [NUM_AE-1:0][XLEN-1:0]        isax_resp_data,
  output logic     [NUM_AE-1:0]                  isax_fwd_valid,
  output logic     [NUM_AE-1:0][4:0]             isax_fwd_rd,
  output logic     [NUM_AE-1:0][XLEN-1:0]        isax_fwd_data,
  // observation
  output logic                                   mapper_pkt_valid,
  output logic                                   mapper_pkt_ready,
  output logic     [NUM_AE-1:0]                  alloc_wr,
  output logic     [NUM_AE-1:0]                  routed_deliver
);
  // ---- forwarding channel <-> event filter ----------------------------
  logic [LANES-1:0]             held_valid, prf_sel;
  logic [LANES-1:0][INST_W-1:0] held_inst;
  logic [LANES-1:0][PC_W-1:0]   held_pc;
  logic [LANES-1:0][XLEN-1:0]   fwd_prf, fwd_ldq, fwd_stq, fwd_ftq;

  dfc_channel #(.LANES(LANES), .NUM_RD_PORTS(NUM_RD_PORTS)) u_dfc (
    .clk (clk_core), .rst_n (rst_core_n),
    .commit_valid, .commit_inst, .commit_pc, .commit_prf_idx,
    .held_valid, .held_inst, .held_pc,
    .prf_sel,
    .iq_ren, .iq_raddr, .iq_stall, .iq_rdata,
    .prf_ren, .prf_raddr, .prf_rdata,
    .ldq_top, .stq_top, .ftq_top,
    .fwd_prf_data (fwd_prf), .fwd_ldq_data (fwd_ldq),
    .fwd_stq_data (fwd_stq), .fwd_ftq_data (fwd_ftq)
  );

  fg_pkt_t filt_pkt;
  logic    filt_valid, filt_ready;

  event_filter #(.LANES(LANES), .FIFO_DEPTH(FIFO_DEPTH)) u_filter (
    .clk (clk_core), .rst_n (rst_core_n),
    .cfg_we (cfg_ft_we), .cfg_addr (cfg_ft_addr), .cfg_data (cfg_ft_data),
    .commit_valid, .commit_inst, .commit_stall,
    .held_valid, .held_inst, .held_pc, .prf_sel,
    .fwd_prf_data (fwd_prf), .fwd_ldq_data (fwd_ldq),
    .fwd_stq_data (fwd_stq), .fwd_ftq_data (fwd_ftq),
    .pkt_valid (filt_valid), .pkt (filt_pkt), .pkt_ready (filt_ready)
  );

  assign mapper_pkt_valid = filt_valid;
  assign mapper_pkt_ready = filt_ready;

  // ---- allocator ----------------------------------------------------------
  logic [NUM_AE-1:0] cdc_full, ae_room;
  fg_pkt_t           alloc_pkt;

  assign ae_room = ~cdc_full;

  allocator #(.NUM_SE(NUM_SE), .NUM_AE(NUM_AE)) u_alloc (
    .clk (clk_core), .rst_n (rst_core_n),
    .cfg_dist_we, .cfg_dist_gid, .cfg_dist_se_bitmap,
    .cfg_se_we, .cfg_se_policy, .cfg_se_members,
    .in_valid (filt_valid), .in_pkt (filt_pkt), .in_ready (filt_ready),
    .ae_room, .out_wr (alloc_wr), .out_pkt (alloc_pkt), .ae_bitmap ()
  );

  // ---- clock crossing, fabric, engines -----------------------------------
  logic    [NUM_AE-1:0] mc_valid, mc_pop, cdc_empty;
  fg_pkt_t [NUM_AE-1:0] mc_pkt;
  logic    [NUM_AE-1:0] iq_push, iq_room, oq_valid, oq_pop;
  fg_pkt_t [NUM_AE-1:0] iq_pkt;
  flit_t   [NUM_AE-1:0] oq_flit;

  for (genvar a = 0; a < NUM_AE; a++) begin : g_ae
    logic [PKT_W-1:0] cdc_rdata;

    cdc_fifo #(.WIDTH(PKT_W), .DEPTH(CDC_DEPTH)) u_cdc (
      .wclk (clk_core), .wrst_n (rst_core_n),
      .wr (alloc_wr[a]), .wdata (alloc_pkt), .wfull (cdc_full[a]),
      .rclk (clk_ae), .rrst_n (rst_ae_n),
      .rd (mc_pop[a]), .rdata (cdc_rdata), .rempty (cdc_empty[a])
    );
    assign mc_valid[a] = !cdc_empty[a];
    assign mc_pkt[a]   = fg_pkt_t'(cdc_rdata);

    logic             ctl_valid, ctl_busy;
    isax_op_e         ctl_op;
    logic [XLEN-1:0]  ctl_arg, ctl_rdata;
    logic             psel, penable, pwrite, pready;
    logic [3:0]       paddr;
    logic [XLEN-1:0]  pwdata, prdata;

    msg_queues #(.DEPTH(MSQ_DEPTH), .NODE_ID(a)) u_msq (
      .clk (clk_ae), .rst_n (rst_ae_n),
      .iq_push (iq_push[a]), .iq_pkt (iq_pkt[a]), .iq_room (iq_room[a]),
      .oq_valid (oq_valid[a]), .oq_flit (oq_flit[a]), .oq_pop (oq_pop[a]),
      .ctl_valid, .ctl_op, .ctl_arg, .ctl_rdata, .ctl_busy,
      .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready
    );

    isax_ifc u_isax (
      .clk (clk_ae), .rst_n (rst_ae_n),
      .req_valid (isax_req_valid[a]), .req_op (isax_req_op[a]),
      .req_rd (isax_req_rd[a]), .req_rs1 (isax_req_rs1[a]), .req_rs2 (isax_req_rs2[a]),
      .stall (isax_stall[a]),
      .resp_valid (isax_resp_valid[a]), .resp_rd (isax_resp_rd[a]), .resp_data (isax_resp_data[a]),
      .fwd_valid (isax_fwd_valid[a]), .fwd_rd (isax_fwd_rd[a]), .fwd_data (isax_fwd_data[a]),
      .ctl_valid, .ctl_op, .ctl_arg, .ctl_rdata, .ctl_busy,
      .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready
    );
  end

  fabric #(.NUM_AE(NUM_AE), .MESH_X(MESH_X)) u_fabric (
    .clk (clk_ae), .rst_n (rst_ae_n),
    .mc_valid, .mc_pkt, .mc_pop,
    .iq_push, .iq_pkt, .iq_room,
    .oq_valid, .oq_flit, .oq_pop,
    .routed_deliver
  );
endmodule
