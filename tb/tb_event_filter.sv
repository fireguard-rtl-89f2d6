// tb_event_filter: self-checking test of the superscalar event filter.
//
// The testbench plays the core and the forwarding channel: it retires up to
// four random instructions per cycle (holding commit while commit_stall is
// high), presents the held PC/instruction one cycle later, and answers the
// filter's data requests with values derived from the PC (PRF data only when
// prf_sel asks for it).  A reference copy of the filter table predicts which
// instructions are relevant, their GID and which debug data they carry; the
// packets leaving the filter must match that list in commit order.  Checked
// too: the first packet of an idle filter leaves two cycles after commit,
// back-pressure (commit_stall) occurs under a slow consumer, and every lane
// produced packets.
module tb_event_filter;
  import fireguard_pkg::*;

  localparam int L = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 cfg_we;
  logic [9:0]           cfg_addr;
  ft_entry_t            cfg_data;
  logic [L-1:0]         commit_valid, held_valid, prf_sel;
  logic [L-1:0][31:0]   commit_inst, held_inst;
  logic [L-1:0][39:0]   commit_pc, held_pc;
  logic                 commit_stall, pkt_valid, pkt_ready;
  logic [L-1:0][63:0]   fwd_prf_data, fwd_ldq_data, fwd_stq_data, fwd_ftq_data;
  fg_pkt_t              pkt;

  event_filter #(.LANES(L), .FIFO_DEPTH(16)) dut (.*);

  // forwarding-channel model: hold the commit for one cycle
  always_ff @(posedge clk) begin
    held_valid <= rst_n ? commit_valid : '0;
    held_inst  <= commit_inst;
    held_pc    <= commit_pc;
  end
  function automatic logic [63:0] dval(input logic [39:0] pc, input int kind);
    return {24'(kind), pc};
  endfunction
  always_comb
    for (int x = 0; x < L; x++) begin
      fwd_prf_data[x] = prf_sel[x] ? dval(held_pc[x], 0) : 64'hDEAD;
      fwd_ldq_data[x] = dval(held_pc[x], 1);
      fwd_stq_data[x] = dval(held_pc[x], 2);
      fwd_ftq_data[x] = dval(held_pc[x], 3);
    end

  int checks = 0, failures = 0, stalls = 0;
  int lane_hits [L];
  fg_pkt_t expq [$];
  ft_entry_t tabl [int];
  logic [39:0] pc_ctr = 40'h1000;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n && pkt_valid && pkt_ready) begin
    if (expq.size() == 0) check(0, "unexpected packet");
    else check(pkt == expq.pop_front(), $sformatf("packet pc %h", pkt.pc));
  end
  always @(posedge clk) if (rst_n && commit_stall) stalls++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [6:0] opcs [5] = '{7'h03, 7'h23, 7'h67, 7'h33, 7'h13};

  task automatic retire_cycle(input int density);
    @(negedge clk);
    for (int x = 0; x < L; x++) commit_valid[x] = 1'b0;
    if (commit_stall) return;
    for (int x = 0; x < L; x++) begin
      logic [6:0] o;
      logic [9:0] a;
      o = opcs[$urandom_range(0, 4)];
      commit_valid[x] = ($urandom_range(0, 99) < density);
      commit_inst[x]  = {17'($urandom), 3'd0, 5'($urandom), o};
      commit_pc[x]    = pc_ctr;
      if (commit_valid[x]) begin
        pc_ctr += 4;
        a = {3'd0, o};
        if (tabl.exists(int'(a)) && tabl[int'(a)].gid != 0) begin
          fg_pkt_t e;
          e.gid  = tabl[int'(a)].gid;
          e.inst = commit_inst[x];
          e.pc   = commit_pc[x];
          e.debug_data = dval(commit_pc[x], int'(tabl[int'(a)].dp_sel));
          expq.push_back(e);
          lane_hits[x]++;
        end
      end
    end
  endtask

  initial begin
    int lat;
    cfg_we = 0; cfg_addr = 0; cfg_data = '0; commit_valid = 0; commit_inst = 0;
    commit_pc = 0; pkt_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // lb->1/LDQ, sb->2/STQ, jalr->3/FTQ, add->1/PRF; addi left at GID 0
    for (int i = 0; i < 4; i++) begin
      ft_entry_t e;
      e.gid = (i == 3) ? 2'd1 : 2'(i + 1);
      e.dp_sel = dp_sel_e'((i == 3) ? 0 : i + 1);
      @(negedge clk);
      cfg_we = 1; cfg_addr = {3'd0, opcs[i]}; cfg_data = e;
      tabl[int'({3'd0, opcs[i]})] = e;
    end
    @(negedge clk) cfg_we = 0;

    // latency: one add on lane 2
    @(negedge clk);
    commit_valid = 4'b0100;
    commit_inst[2] = {17'd0, 3'd0, 5'd1, 7'h33};
    commit_pc[2] = 40'h0bad0;
    begin
      fg_pkt_t e;
      e.gid = 2'd1; e.inst = commit_inst[2]; e.pc = commit_pc[2]; e.debug_data = dval(commit_pc[2], 0);
      expq.push_back(e);
    end
    @(negedge clk) commit_valid = 0;
    lat = 1;
    while (!pkt_valid && lat < 10) begin @(negedge clk); lat++; end
    check(lat == 2, $sformatf("commit-to-packet latency %0d, expected 2", lat));
    @(negedge clk);

    // random traffic with a slow consumer
    fork
      repeat (3000) retire_cycle(70);
      repeat (3000) @(negedge clk) pkt_ready = ($urandom_range(0, 3) == 0);
    join
    @(negedge clk) commit_valid = 0; pkt_ready = 1;
    repeat (200) @(posedge clk);
    check(expq.size() == 0, "all relevant instructions delivered");
    check(stalls > 0, "back-pressure to the core occurred");
    for (int x = 0; x < L; x++) check(lane_hits[x] > 0, "lane produced packets");
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
