// fabric: the mapper's distributed fabric network, in the slow clock domain.
//
// Two channels share it.  The multicast (1-to-N) channel carries filtered
// packets: for every analysis engine, a multiplexer moves the head of that
// engine's clock-crossing queue into the engine's input message queue.  The
// allocator has already decided, per packet, which crossing queues receive
// it, so each engine has its own path and nothing is broadcast.  The routing
// (N-to-N) channel is a MESH_X x MESH_Y mesh of noc_router with one engine on
// each node: the head of an engine's output queue enters its router's local
// port and leaves at the destination router's local port, where the same
// multiplexer puts it into that engine's input queue.
//
// Mux priority: a filtered packet wins over a routed one in the same cycle;
// the routed flit waits in the router.  A routed flit is stored in the input
// queue as a packet with GID 0 (which no filtered packet carries), its 64-bit
// payload in the debug-data field and the sender's engine id in the PC
// field, so a kernel can tell the two kinds apart.  Timing: one packet per
// engine per cycle into each input queue; one cycle per mesh hop.
// Own choices: the mux priority, the routed-packet layout, XY routing.
module fabric
  import fireguard_pkg::*;
#(
  parameter int unsigned NUM_AE = 4,
  parameter int unsigned MESH_X = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // multicast channel: heads of the crossing queues
  input  logic    [NUM_AE-1:0]    mc_valid,
  input  fg_pkt_t [NUM_AE-1:0]    mc_pkt,
  output logic    [NUM_AE-1:0]    mc_pop,
  // input message queues
  output logic    [NUM_AE-1:0]    iq_push,
  output fg_pkt_t [NUM_AE-1:0]    iq_pkt,
  input  logic    [NUM_AE-1:0]    iq_room,
  // output message queues
  input  logic    [NUM_AE-1:0]    oq_valid,
  input  flit_t   [NUM_AE-1:0]    oq_flit,
  output logic    [NUM_AE-1:0]    oq_pop,
  // activity, for observation
  output logic    [NUM_AE-1:0]    routed_deliver
);
  localparam int unsigned MESH_Y = NUM_AE / MESH_X;

  // router port arrays, indexed by node
  logic  [NUM_AE-1:0][4:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  flit_t [NUM_AE-1:0][4:0] r_in_flit, r_out_flit;

  for (genvar n = 0; n < NUM_AE; n++) begin : g_node
    localparam int unsigned NX = n % MESH_X;
    localparam int unsigned NY = n / MESH_X;

    noc_router #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .X(NX), .Y(NY)) u_router (
      .clk, .rst_n,
      .in_valid  (r_in_valid[n]),
      .in_flit   (r_in_flit[n]),
      .in_ready  (r_in_ready[n]),
      .out_valid (r_out_valid[n]),
      .out_flit  (r_out_flit[n]),
      .out_ready (r_out_ready[n])
    );

    // local port: output queue in, input-queue mux out
    assign r_in_valid[n][0] = oq_valid[n];
    assign r_in_flit[n][0]  = oq_flit[n];
    assign oq_pop[n]        = oq_valid[n] && r_in_ready[n][0];

    logic    lo_push, lo_mc_pop, lo_ready;
    fg_pkt_t lo_pkt;

    always_comb begin
      lo_push   = 1'b0;
      lo_pkt    = mc_pkt[n];
      lo_mc_pop = 1'b0;
      lo_ready  = 1'b0;
      if (mc_valid[n]) begin
        lo_push   = iq_room[n];
        lo_mc_pop = iq_room[n];
      end else if (r_out_valid[n][0]) begin
        lo_push           = iq_room[n];
        lo_ready          = iq_room[n];
        lo_pkt.debug_data = r_out_flit[n][0].data;
        lo_pkt.pc         = PC_W'(r_out_flit[n][0].src);
        lo_pkt.inst       = '0;
        lo_pkt.gid        = '0;
      end
    end

    assign iq_push[n]        = lo_push;
    assign iq_pkt[n]         = lo_pkt;
    assign mc_pop[n]         = lo_mc_pop;
    assign r_out_ready[n][0] = lo_ready;
    assign routed_deliver[n] = lo_ready;

    // north (port 1) <-> south port of node n-MESH_X
    if (NY > 0) begin : g_n
      assign r_in_valid[n][1]  = r_out_valid[n-MESH_X][2];
      assign r_in_flit[n][1]   = r_out_flit[n-MESH_X][2];
      assign r_out_ready[n][1] = r_in_ready[n-MESH_X][2];
    end else begin : g_n_edge
      assign r_in_valid[n][1]  = 1'b0;
      assign r_in_flit[n][1]   = '0;
      assign r_out_ready[n][1] = 1'b1;
    end
    // south (port 2) <-> north port of node n+MESH_X
    if (NY < MESH_Y - 1) begin : g_s
      assign r_in_valid[n][2]  = r_out_valid[n+MESH_X][1];
      assign r_in_flit[n][2]   = r_out_flit[n+MESH_X][1];
      assign r_out_ready[n][2] = r_in_ready[n+MESH_X][1];
    end else begin : g_s_edge
      assign r_in_valid[n][2]  = 1'b0;
      assign r_in_flit[n][2]   = '0;
      assign r_out_ready[n][2] = 1'b1;
    end
    // east (port 3) <-> west port of node n+1
    if (NX < MESH_X - 1) begin : g_e
      assign r_in_valid[n][3]  = r_out_valid[n+1][4];
      assign r_in_flit[n][3]   = r_out_flit[n+1][4];
      assign r_out_ready[n][3] = r_in_ready[n+1][4];
    end else begin : g_e_edge
      assign r_in_valid[n][3]  = 1'b0;
      assign r_in_flit[n][3]   = '0;
      assign r_out_ready[n][3] = 1'b1;
    end
    // west (port 4) <-> east port of node n-1
    if (NX > 0) begin : g_w
      assign r_in_valid[n][4]  = r_out_valid[n-1][3];
      assign r_in_flit[n][4]   = r_out_flit[n-1][3];
      assign r_out_ready[n][4] = r_in_ready[n-1][3];
    end else begin : g_w_edge
      assign r_in_valid[n][4]  = 1'b0;
      assign r_in_flit[n][4]   = '0;
      assign r_out_ready[n][4] = 1'b1;
    end
  end

  initial begin
    assert (MESH_X * MESH_Y == NUM_AE)
      else $error("fabric: NUM_AE must fill a MESH_X-wide mesh");
  end
endmodule
