// noc_router: one router of the fabric's routing channel, a 2-D mesh on a
// Manhattan grid that lets analysis engines send packets to one another.
//
// The router has five bidirectional ports: local (its analysis engine),
// north, south, east and west.  Each input port buffers IN_DEPTH single-flit
// packets.  Routing is dimension-ordered (first along x, then along y), which
// is deadlock-free on a mesh.  Every output port has a round-robin arbiter
// over the inputs whose head flit wants it.  Handshake on every port is
// valid/ready: a flit moves on a clock edge where valid and ready are both
// high; ready is the receiving buffer's "not full", valid is the sending
// buffer's "not empty", so no combinational path runs from router to router.
// Timing: one cycle per hop when uncontended.
// The paper gives the mesh and the five ports; buffering, XY routing and the
// arbiters are this design's own choices.  Node ids are y*MESH_X + x; y grows
// to the south.  A router on the edge of the MESH_X x MESH_Y mesh has no
// buffer on the side without a neighbour: that input is never ready and
// never holds a flit.
module noc_router
  import fireguard_pkg::*;
#(
  parameter int unsigned MESH_X   = 2,
  parameter int unsigned MESH_Y   = 2,
  parameter int          X        = 0,
  parameter int          Y        = 0,
  parameter int unsigned IN_DEPTH = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  // ports: 0 local, 1 north, 2 south, 3 east, 4 west
  input  logic  [4:0]   in_valid,
  input  flit_t [4:0]   in_flit,
  output logic  [4:0]   in_ready,
  output logic  [4:0]   out_valid,
  output flit_t [4:0]   out_flit,
  input  logic  [4:0]   out_ready
);
  localparam int P_LOCAL = 0, P_NORTH = 1, P_SOUTH = 2, P_EAST = 3, P_WEST = 4;

  flit_t [4:0]      head;
  logic  [4:0]      empty, full, pop;
  logic  [4:0][2:0] route;

  // ports that have a neighbour (local always)
  localparam logic [4:0] HAS_PORT = {X > 0, X < int'(MESH_X) - 1, Y < int'(MESH_Y) - 1, Y > 0, 1'b1};

  for (genvar p = 0; p < 5; p++) begin : g_in
    if (HAS_PORT[p]) begin : g_buf
      fg_sync_fifo #(.WIDTH(FLIT_W), .DEPTH(IN_DEPTH)) u_buf (
        .clk, .rst_n,
        .push  (in_valid[p] && !full[p]),
        .din   (in_flit[p]),
        .pop   (pop[p]),
        .dout  (head[p]),
        .full  (full[p]),
        .empty (empty[p]),
        .count ()
      );
    end else begin : g_nobuf
      assign head[p]  = '0;
      assign full[p]  = 1'b1;
      assign empty[p] = 1'b1;
    end
    assign in_ready[p] = !full[p];

    // XY route of the head flit
    int dx, dy;
    assign dx = int'(head[p].dst) % int'(MESH_X);
    assign dy = int'(head[p].dst) / int'(MESH_X);
    always_comb begin
      if      (dx > X) route[p] = 3'(P_EAST);
      else if (dx < X) route[p] = 3'(P_WEST);
      else if (dy > Y) route[p] = 3'(P_SOUTH);
      else if (dy < Y) route[p] = 3'(P_NORTH);
      else             route[p] = 3'(P_LOCAL);
    end
  end

  // Output arbitration
  logic [4:0][2:0] rr_q;      // last granted input per output
  logic [4:0][2:0] grant;
  logic [4:0]      gvalid;

  function automatic logic [3:0] rr_pick(input logic [4:0] req, input logic [2:0] last);
    logic [3:0] r;
    r = '0;
    for (int k = 5; k >= 1; k--)
      if (req[(int'(last) + k) % 5]) r = {1'b1, 3'((int'(last) + k) % 5)};
    return r;
  endfunction

  logic [4:0][4:0] req;

  always_comb begin
    for (int o = 0; o < 5; o++)
      for (int i = 0; i < 5; i++) req[o][i] = !empty[i] && (route[i] == 3'(o));
  end

  for (genvar o = 0; o < 5; o++) begin : g_out
    assign {gvalid[o], grant[o]} = rr_pick(req[o], rr_q[o]);
    assign out_valid[o] = gvalid[o];
    assign out_flit[o]  = head[grant[o]];
  end

  always_comb begin
    pop = '0;
    for (int o = 0; o < 5; o++)
      if (gvalid[o] && out_ready[o]) pop[grant[o]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr_q <= '0;
    else
      for (int o = 0; o < 5; o++)
        if (gvalid[o] && out_ready[o]) rr_q[o] <= grant[o];
  end
endmodule
