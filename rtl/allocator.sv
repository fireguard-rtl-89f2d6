// allocator: first half of the mapper, deciding which analysis engines get
// each filtered packet through a two-level bitmap.
//
// Level 1, the distributor: one SE_Bitmap register per GID names the
// scheduling engines (one per guardian kernel) interested in that group of
// instructions; e.g. bit 0 of SE_Bitmap[3] sends GID-3 packets to SE 0.
// Level 2, the SEs: each activated SE picks one engine of its kernel's group
// and sets its bit in its AE_Bitmap.  The AE_Bitmaps of all SEs are ORed into
// the decision, so one packet can go to several engines at once (one per
// interested kernel) without broadcasting to all.
//
// Pipeline: cycle t, the packet at the input is taken if the stage is free
// (or emptying) and every activated SE can find an engine with room; the SEs
// register their choice.  From cycle t+1 the packet sits in the stage with
// its engine bitmap and is written into the clock-crossing queue of every
// selected engine in the first cycle all of them have room (out_wr); then
// the SEs move CT_reg to PT_reg.  Throughput is one packet per cycle.
// A packet whose GID activates no SE is taken and dropped.
// Own choices: valid/ready handshakes, room taken from the crossing queues'
// full flags, SE_Bitmap and SE registers written through simple write ports.
module allocator
  import fireguard_pkg::*;
#(
  parameter int unsigned NUM_SE = 4,
  parameter int unsigned NUM_AE = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // distributor configuration
  input  logic                      cfg_dist_we,
  input  logic [GID_W-1:0]          cfg_dist_gid,
  input  logic [NUM_SE-1:0]         cfg_dist_se_bitmap,
  // SE configuration
  input  logic [NUM_SE-1:0]         cfg_se_we,
  input  sched_pol_e                cfg_se_policy,
  input  logic [NUM_AE-1:0]         cfg_se_members,
  // packets from the event filter
  input  logic                      in_valid,
  input  fg_pkt_t                   in_pkt,
  output logic                      in_ready,
  // towards the per-engine crossing queues
  input  logic [NUM_AE-1:0]         ae_room,
  output logic [NUM_AE-1:0]         out_wr,
  output fg_pkt_t                   out_pkt,
  output logic [NUM_AE-1:0]         ae_bitmap
);
  // Distributor
  logic [NUM_SE-1:0] se_bitmap_q [NUM_GID];
  logic [NUM_SE-1:0] se_act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < int'(NUM_GID); g++) se_bitmap_q[g] <= '0;
    end else if (cfg_dist_we) begin
      se_bitmap_q[cfg_dist_gid] <= cfg_dist_se_bitmap;
    end
  end

  assign se_act = se_bitmap_q[in_pkt.gid];

  // Stage register
  logic    stage_vld_q;
  fg_pkt_t stage_pkt_q;
  logic    sent, accept;
  logic [NUM_SE-1:0] can_sched;
  logic [NUM_SE-1:0][NUM_AE-1:0] se_ae_bitmap;

  always_comb begin
    ae_bitmap = '0;
    for (int s = 0; s < NUM_SE; s++) ae_bitmap |= se_ae_bitmap[s];
  end

  assign sent     = stage_vld_q && ((ae_bitmap & ~ae_room) == '0);
  assign in_ready = (!stage_vld_q || sent) && ((se_act & ~can_sched) == '0);
  assign accept   = in_valid && in_ready;

  for (genvar s = 0; s < NUM_SE; s++) begin : g_se
    scheduling_engine #(.NUM_AE(NUM_AE)) u_se (
      .clk, .rst_n,
      .cfg_we      (cfg_se_we[s]),
      .cfg_policy  (cfg_se_policy),
      .cfg_members (cfg_se_members),
      .activate    (accept && se_act[s]),
      .ae_room     (ae_room),
      .can_sched   (can_sched[s]),
      .sent        (sent),
      .ae_bitmap   (se_ae_bitmap[s])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stage_vld_q <= 1'b0;
    else if (accept) stage_vld_q <= 1'b1;
    else if (sent)   stage_vld_q <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (accept) stage_pkt_q <= in_pkt;
  end

  assign out_wr  = sent ? ae_bitmap : '0;
  assign out_pkt = stage_pkt_q;
endmodule
