// fireguard_pkg: sizes, packet formats and encodings shared by the FireGuard
// monitoring fabric.
//
// The 138-bit filter packet follows the encapsulation format of the event
// filter: Debug_Data[137:74], PC[73:34], Inst[33:2], GID[1:0].  The default
// sizes are the evaluated configuration: a 4-wide commit, 128 physical
// registers of 64 bits, 4 scheduling engines, 4 analysis engines, 16-entry
// filter FIFOs, 8-entry clock-crossing queues and 32-entry message queues.
// The data-path select code, the ISAX operation codes and the routed-packet
// layout are this design's own choices.
package fireguard_pkg;

  // ---- main core side -------------------------------------------------
  localparam int unsigned XLEN      = 64;   // operand / debug data width
  localparam int unsigned PC_W      = 40;   // PC field of a packet
  localparam int unsigned INST_W    = 32;   // instruction word
  localparam int unsigned PRF_ENTRIES = 128;
  localparam int unsigned PRF_IDX_W = $clog2(PRF_ENTRIES);

  // ---- filter ---------------------------------------------------------
  localparam int unsigned FT_ADDR_W = 10;   // {funct3, opcode}
  localparam int unsigned GID_W     = 2;    // GID 0 = irrelevant
  localparam int unsigned NUM_GID   = 1 << GID_W;

  // Data path selected by a mini-filter entry (DP_Sel)
  typedef enum logic [1:0] {
    DP_PRF = 2'd0,   // operand/result from the physical register file
    DP_LDQ = 2'd1,   // load address from the load queue top
    DP_STQ = 2'd2,   // store address from the store queue top
    DP_FTQ = 2'd3    // jump target from the fetch target queue
  } dp_sel_e;

  // Filter table entry
  typedef struct packed {
    logic [GID_W-1:0] gid;
    dp_sel_e          dp_sel;
  } ft_entry_t;

  // Encapsulated packet (138 bits)
  typedef struct packed {
    logic [XLEN-1:0]   debug_data;   // [137:74]
    logic [PC_W-1:0]   pc;           // [73:34]
    logic [INST_W-1:0] inst;         // [33:2]
    logic [GID_W-1:0]  gid;          // [1:0]
  } fg_pkt_t;

  localparam int unsigned PKT_W = $bits(fg_pkt_t);

  // ---- routing channel flit (ucore to ucore) -----------------------------
  localparam int unsigned NODE_W = 4;       // engine id width (up to 16 engines)
  typedef struct packed {
    logic [NODE_W-1:0] dst;
    logic [NODE_W-1:0] src;
    logic [XLEN-1:0]   data;
  } flit_t;

  localparam int unsigned FLIT_W = $bits(flit_t);

  // ---- ISAX operations (funct3 of the custom instruction) ---------------
  typedef enum logic [2:0] {
    OP_COUNT   = 3'd0,
    OP_TOP     = 3'd1,
    OP_POP     = 3'd2,
    OP_RECENT  = 3'd3,
    OP_PUSH    = 3'd4,
    OP_STAT_RD = 3'd5,
    OP_STAT_WR = 3'd6
  } isax_op_e;

  // Status register map behind the APB bridge (word index)
  localparam logic [3:0] STAT_ID      = 4'd0;  // own engine id (read only)
  localparam logic [3:0] STAT_IN_CNT  = 4'd1;  // input queue occupancy
  localparam logic [3:0] STAT_OUT_CNT = 4'd2;  // output queue occupancy
  localparam logic [3:0] STAT_DEST    = 4'd3;  // destination engine of push
  localparam logic [3:0] STAT_DROPS   = 4'd4;  // pops attempted on empty queue

  // Scheduling policies of a scheduling engine
  typedef enum logic [1:0] {
    POL_FIXED = 2'd0,   // lowest-indexed engine of the group that has room
    POL_RR    = 2'd1,   // next engine after the previous target
    POL_BLOCK = 2'd2    // stay on the previous target until it is full
  } sched_pol_e;

endpackage
