// scheduling_engine: one Scheduling Engine (SE) of the allocator.
//
// An SE belongs to one guardian kernel.  Its group register (member mask) says
// which analysis engines run that kernel, and for every packet the kernel
// must see, the scheduling circuit picks one engine of the group as the
// current target.  The previous target (PT_reg) is the starting point of the
// choice; the current target is held in CT_reg, sets its bit in the AE_Bitmap
// register, and moves to PT_reg once the packet has been transmitted.
//
// Policies (cfg_policy):
//   POL_FIXED  lowest-indexed member with room (fixed priority);
//   POL_RR     first member with room after the previous target (round robin);
//   POL_BLOCK  the previous target while it has room, then round robin on,
//              so a ucore receives every packet until its queue is full.
// ae_room[i] says engine i can take a packet.  can_sched is low when the SE is
// asked to schedule but no member has room; the allocator then holds the
// packet.  An SE with an empty group never targets anything.
//
// Timing: activate in cycle t loads CT_reg and AE_Bitmap at the end of t
// (one-cycle scheduling decision); sent in a later cycle clears AE_Bitmap and
// copies CT_reg into PT_reg.  A new activation in the same cycle as sent
// starts from the target being sent.
// Follows the paper: PT_reg, CT_reg, AE_Bitmap, the three policies.  Own
// choices: skipping members without room, and the member mask register.
module scheduling_engine
  import fireguard_pkg::*;
#(
  parameter int unsigned NUM_AE = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_we,
  input  sched_pol_e        cfg_policy,
  input  logic [NUM_AE-1:0] cfg_members,
  // scheduling
  input  logic              activate,
  input  logic [NUM_AE-1:0] ae_room,
  output logic              can_sched,
  input  logic              sent,
  output logic [NUM_AE-1:0] ae_bitmap
);
  localparam int unsigned TW = (NUM_AE > 1) ? $clog2(NUM_AE) : 1;

  sched_pol_e        policy_q;
  logic [NUM_AE-1:0] members_q;
  logic [TW-1:0]     pt_q, ct_q;
  logic              ct_vld_q;
  logic [NUM_AE-1:0] bitmap_q;

  logic [TW-1:0]     prev;
  logic [NUM_AE-1:0] avail;
  logic [TW-1:0]     target;
  logic              found;

  assign prev  = ct_vld_q ? ct_q : pt_q;
  assign avail = members_q & ae_room;

  // first set bit of m at or after position start, cyclically
  function automatic logic [TW:0] first_from(input logic [NUM_AE-1:0] m,
                                             input int unsigned start);
    logic [TW:0] r;
    r = '0;
    for (int k = NUM_AE - 1; k >= 0; k--)
      if (m[(start + k) % NUM_AE]) r = {1'b1, TW'((start + k) % NUM_AE)};
    return r;
  endfunction

  // Scheduling circuit
  logic [TW:0] pick_fixed, pick_rr;
  assign pick_fixed = first_from(avail, 0);
  assign pick_rr    = first_from(avail, int'(prev) + 1);

  always_comb begin
    unique case (policy_q)
      POL_FIXED: {found, target} = pick_fixed;
      POL_BLOCK: {found, target} = avail[prev] ? {1'b1, prev} : pick_rr;
      default:   {found, target} = pick_rr;
    endcase
    can_sched = found || (members_q == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      policy_q  <= POL_FIXED;
      members_q <= '0;
      pt_q      <= '0;
      ct_q      <= '0;
      ct_vld_q  <= 1'b0;
      bitmap_q  <= '0;
    end else begin
      if (cfg_we) begin
        policy_q  <= cfg_policy;
        members_q <= cfg_members;
        pt_q      <= '0;
        ct_vld_q  <= 1'b0;
        bitmap_q  <= '0;
      end else begin
        if (sent) begin
          if (ct_vld_q) pt_q <= ct_q;
          ct_vld_q <= 1'b0;
          bitmap_q <= '0;
        end
        if (activate && found) begin
          ct_q     <= target;
          ct_vld_q <= 1'b1;
          bitmap_q <= NUM_AE'(1) << target;
        end
      end
    end
  end

  assign ae_bitmap = bitmap_q;

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(bitmap_q));
endmodule
