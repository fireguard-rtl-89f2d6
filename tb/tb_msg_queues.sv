// tb_msg_queues: self-checking test of the message queues and MSQ_Ctrl.
//
// A reference queue of 138-bit packets models the input queue.  The test
// fills it to its 32-entry capacity (room must drop exactly then), then runs
// random COUNT, TOP, POP and RECENT operations with random bit offsets
// (including ones that run past bit 137), interleaved with new arrivals, and
// compares each result with the reference bit-field [off+63:off].  PUSH is
// checked against the output queue head with the destination written over
// APB, including the busy response when the output queue is full.  The
// status registers are read back over APB.
module tb_msg_queues;
  import fireguard_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        iq_push, iq_room, oq_valid, oq_pop, ctl_valid, ctl_busy;
  logic        psel, penable, pwrite, pready;
  fg_pkt_t     iq_pkt;
  flit_t       oq_flit;
  isax_op_e    ctl_op;
  logic [63:0] ctl_arg, ctl_rdata, pwdata, prdata;
  logic [3:0]  paddr;

  msg_queues #(.DEPTH(32), .NODE_ID(5)) dut (.*);

  int checks = 0, failures = 0;
  fg_pkt_t ref_q [$];
  fg_pkt_t recent = '0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [63:0] fld(input fg_pkt_t p, input int off);
    logic [137+64:0] ext;
    ext = {64'd0, p};
    if (off > 137) return '0;
    return ext[off +: 64];
  endfunction

  function automatic fg_pkt_t rndpkt();
    return '{debug_data: {32'($urandom), 32'($urandom)}, pc: {8'($urandom), 32'($urandom)},
             inst: 32'($urandom), gid: 2'($urandom)};
  endfunction

  task automatic apb(input logic wr, input logic [3:0] a, input logic [63:0] wd, output logic [63:0] rd);
    @(negedge clk);
    psel = 1; penable = 0; pwrite = wr; paddr = a; pwdata = wd;
    @(negedge clk);
    penable = 1;
    #1 rd = prdata;
    @(negedge clk);
    psel = 0; penable = 0;
  endtask

  task automatic op(input isax_op_e o, input logic [63:0] arg, output logic [63:0] res, output logic busy);
    @(negedge clk);
    ctl_valid = 1; ctl_op = o; ctl_arg = arg;
    #1 res = ctl_rdata; busy = ctl_busy;
    @(negedge clk);
    ctl_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] r;
    logic b;
    static int offs [8] = '{0, 2, 34, 74, 100, 137, 138, 200};
    iq_push = 0; iq_pkt = '0; oq_pop = 0; ctl_valid = 0; ctl_op = OP_COUNT; ctl_arg = 0;
    psel = 0; penable = 0; pwrite = 0; paddr = 0; pwdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    apb(0, STAT_ID, 0, r);
    check(r == 5, "engine id register");
    // fill
    for (int k = 0; k < 40; k++) begin
      @(negedge clk);
      iq_push = iq_room; iq_pkt = rndpkt();
      if (iq_room) ref_q.push_back(iq_pkt);
    end
    @(negedge clk) iq_push = 0;
    check(ref_q.size() == 32 && !iq_room, "input queue holds 32 packets");
    op(OP_COUNT, 0, r, b);
    check(r == 32, "count input queue");
    apb(0, STAT_IN_CNT, 0, r);
    check(r == 32, "status input count");
    // random operations
    for (int n = 0; n < 3000; n++) begin
      int off, k;
      off = offs[$urandom_range(0, 7)];
      if ($urandom_range(0, 9) == 0) off = $urandom_range(0, 137);
      k = $urandom_range(0, 4);
      if (k == 0 && iq_room) begin
        @(negedge clk);
        iq_push = 1; iq_pkt = rndpkt(); ref_q.push_back(iq_pkt);
        @(negedge clk) iq_push = 0;
      end else if (k == 1) begin
        op(OP_TOP, 64'(off), r, b);
        check(r == (ref_q.size() != 0 ? fld(ref_q[0], off) : 64'd0), $sformatf("top off %0d", off));
      end else if (k == 2) begin
        op(OP_POP, 64'(off), r, b);
        check(r == (ref_q.size() != 0 ? fld(ref_q[0], off) : 64'd0), $sformatf("pop off %0d", off));
        if (ref_q.size() != 0) recent = ref_q.pop_front();
      end else if (k == 3) begin
        op(OP_RECENT, 64'(off), r, b);
        check(r == fld(recent, off), $sformatf("recent off %0d", off));
      end else begin
        op(OP_COUNT, 0, r, b);
        check(r == 64'(ref_q.size()), "count");
      end
    end
    // push path
    apb(1, STAT_DEST, 64'd3, r);
    apb(0, STAT_DEST, 0, r);
    check(r == 3, "destination register");
    for (int k = 0; k < 33; k++) begin
      op(OP_PUSH, 64'hABC0 + 64'(k), r, b);
      check(b == (k == 32), $sformatf("push busy only when full (%0d)", k));
    end
    op(OP_COUNT, 1, r, b);
    check(r == 32, "count output queue");
    for (int k = 0; k < 32; k++) begin
      @(negedge clk);
      check(oq_valid && oq_flit.dst == 3 && oq_flit.src == 5 && oq_flit.data == 64'hABC0 + 64'(k), "output flit");
      oq_pop = 1;
      @(negedge clk) oq_pop = 0;
    end
    check(!oq_valid, "output queue drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
