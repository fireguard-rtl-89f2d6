// tb_fireguard_scale12: the end-to-end test of tb_fireguard_top repeated on
// the largest configuration evaluated for a bigger core: an 8-wide commit and
// filter (8 PRF read ports), 12 analysis engines on a 4 x 3 mesh, 4 SEs.
// Kernel A (SE 0) takes GIDs 1 and 2 round robin over engines 0-5; kernel B
// (SE 1) takes GIDs 2 and 3 in block mode over engines 6-11, so stores are
// multicast.  The analysis clock (21.4 ns) is unrelated to the core clock
// (10 ns), so the crossing queues see every phase.  Engine 0 sends a
// message to engine 11 every 16 packets, which crosses the whole mesh.  Checks and required mechanisms are those of
// tb_fireguard_top: exactly-once delivery per interested kernel with the
// right content, commit order per engine, in-order routed messages, and
// commit stall, port contention, multicast, hold-back, round-robin
// alternation, block-mode runs, routed delivery, status access, recent.
module tb_fireguard_scale12;
  import fireguard_pkg::*;

  localparam int L = 8, P = 8, NAE = 12, NSE = 4;
  localparam int N_INSTR = 8000;

  logic clk_core = 0, clk_ae = 0, rst_core_n = 0, rst_ae_n = 0;
  always #5  clk_core = ~clk_core;
  always #10.7 clk_ae = ~clk_ae;   // not a multiple of the core clock

  logic                   cfg_ft_we, cfg_dist_we;
  logic [9:0]             cfg_ft_addr;
  ft_entry_t              cfg_ft_data;
  logic [1:0]             cfg_dist_gid;
  logic [NSE-1:0]         cfg_dist_se_bitmap, cfg_se_we;
  sched_pol_e             cfg_se_policy;
  logic [NAE-1:0]         cfg_se_members;
  logic [L-1:0]           commit_valid;
  logic [L-1:0][31:0]     commit_inst;
  logic [L-1:0][39:0]     commit_pc;
  logic [L-1:0][6:0]      commit_prf_idx;
  logic                   commit_stall;
  logic [P-1:0]           iq_ren, iq_stall, prf_ren;
  logic [P-1:0][6:0]      iq_raddr, prf_raddr;
  logic [P-1:0][63:0]     iq_rdata, prf_rdata;
  logic [L-1:0][63:0]     ldq_top, stq_top, ftq_top;
  logic     [NAE-1:0]       isax_req_valid, isax_stall, isax_resp_valid, isax_fwd_valid;
  isax_op_e [NAE-1:0]       isax_req_op;
  logic     [NAE-1:0][4:0]  isax_req_rd, isax_resp_rd, isax_fwd_rd;
  logic     [NAE-1:0][63:0] isax_req_rs1, isax_req_rs2, isax_resp_data, isax_fwd_data;
  logic                   mapper_pkt_valid, mapper_pkt_ready;
  logic [NAE-1:0]         alloc_wr, routed_deliver;

  fireguard_top #(.LANES(8), .NUM_RD_PORTS(8), .NUM_AE(12), .MESH_X(4)) dut (.*);

  // ---------------- core model ----------------
  logic [63:0] prf [128];
  always_comb for (int p = 0; p < P; p++) prf_rdata[p] = prf[prf_raddr[p]];

  function automatic logic [63:0] qval(input logic [39:0] pc, input int kind);
    return {8'hA0 + 8'(kind), 16'h0, pc};
  endfunction

  typedef struct { logic [1:0] gid; logic [31:0] inst; logic [63:0] data; int gotA; int gotB; int engA; int engB; } exp_t;
  exp_t exp_tab [logic [39:0]];
  logic [39:0] pc_list [$];

  int checks = 0, failures = 0;
  int n_stall = 0, n_contention = 0, n_multicast = 0, n_holdback = 0, n_routed = 0, n_status = 0, n_recent = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk_core) if (rst_core_n) begin
    if (commit_stall) n_stall++;
    n_contention += $countones(iq_stall);
    if ($countones(alloc_wr) > 1) n_multicast++;
    if (mapper_pkt_valid && !mapper_pkt_ready) n_holdback++;
  end
  always @(posedge clk_ae) if (rst_ae_n) n_routed += $countones(routed_deliver);

  initial begin
    repeat (400000) @(posedge clk_core);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- ucore models ----------------
  task automatic isax(input int a, input isax_op_e op, input logic [63:0] rs1,
                      input logic [63:0] rs2, output logic [63:0] res);
    @(negedge clk_ae);
    isax_req_valid[a] = 1; isax_req_op[a] = op; isax_req_rd[a] = 5'd10;
    isax_req_rs1[a] = rs1; isax_req_rs2[a] = rs2;
    #1;
    while (isax_stall[a]) begin
      @(negedge clk_ae);
      #1;
    end
    res = isax_resp_data[a];
    if (op != OP_PUSH && op != OP_STAT_WR)
      check(isax_resp_valid[a] && isax_fwd_valid[a] && isax_fwd_data[a] == res, "ISAX response/forward");
    @(posedge clk_ae);
    #1 isax_req_valid[a] = 0;
  endtask

  int kernel_pkts [NAE];
  logic [39:0] last_pc [NAE];
  int msgs_sent = 0, msgs_got = 0;
  bit stop_kernels = 0;

  task automatic kernel(input int a);
    logic [63:0] r, d, pcw, g;
    int seq = 0;
    last_pc[a] = 0;
    if (a == 0) begin
      isax(a, OP_STAT_WR, 64'(STAT_DEST), 64'(NAE - 1), r);
      isax(a, OP_STAT_RD, 64'(STAT_DEST), 0, r);
      check(r == 64'(NAE - 1), "status register readback");
      n_status++;
    end
    while (!stop_kernels) begin
      isax(a, OP_COUNT, 0, 0, r);
      if (r == 0) continue;
      isax(a, OP_TOP, 64'd74, 0, d);
      isax(a, OP_TOP, 64'd34, 0, pcw);
      isax(a, OP_POP, 64'd0, 0, g);
      if (g[1:0] == 2'd0) begin
        // routed message from engine pcw
        check(a == NAE - 1 && pcw[39:0] == 0 && d == 64'hF00D_0000 + 64'(msgs_got), "routed message order/content");
        msgs_got++;
        continue;
      end
      if ($urandom_range(0, 7) == 0) begin
        isax(a, OP_RECENT, 64'd34, 0, r);
        check(r == pcw, "RECENT returns the popped element");
        n_recent++;
      end
      begin
        logic [39:0] pc;
        pc = pcw[39:0];
        if (!exp_tab.exists(pc)) check(0, $sformatf("engine %0d got unknown pc %h", a, pc));
        else begin
          check(exp_tab[pc].gid == g[1:0] && exp_tab[pc].inst == g[33:2] && exp_tab[pc].data == d,
                $sformatf("packet content pc %h", pc));
          if (a < NAE / 2) begin exp_tab[pc].gotA++; exp_tab[pc].engA = a; end
          else       begin exp_tab[pc].gotB++; exp_tab[pc].engB = a; end
        end
        check(pc > last_pc[a], $sformatf("engine %0d in commit order", a));
        last_pc[a] = pc;
      end
      kernel_pkts[a]++;
      if (a == 0 && kernel_pkts[a] % 16 == 0) begin
        isax(a, OP_PUSH, 64'hF00D_0000 + 64'(seq), 0, r);
        seq++;
        msgs_sent++;
      end
      // slow analysis: a few cycles of work per packet
      repeat ($urandom_range(0, 4)) @(posedge clk_ae);
    end
  endtask

  // ---------------- stimulus ----------------
  logic [6:0] opcs [5] = '{7'h03, 7'h23, 7'h67, 7'h33, 7'h13};

  initial begin
    logic [39:0] pc;
    logic [L-1:0][39:0] prev_pc;
    int retired;
    for (int i = 0; i < 128; i++) prf[i] = {32'($urandom), 32'($urandom)};
    cfg_ft_we = 0; cfg_ft_addr = 0; cfg_ft_data = '0; cfg_dist_we = 0; cfg_dist_gid = 0;
    cfg_dist_se_bitmap = 0; cfg_se_we = 0; cfg_se_policy = POL_FIXED; cfg_se_members = 0;
    commit_valid = 0; commit_inst = 0; commit_pc = 0; commit_prf_idx = 0;
    iq_ren = 0; iq_raddr = 0; ldq_top = 0; stq_top = 0; ftq_top = 0;
    isax_req_valid = 0; isax_req_op = '{default: OP_COUNT}; isax_req_rd = 0;
    isax_req_rs1 = 0; isax_req_rs2 = 0;
    repeat (4) @(posedge clk_ae);
    rst_core_n = 1; rst_ae_n = 1;
    // filter tables: lb/ld -> GID1 LDQ, sb/sd -> GID2 STQ, jalr -> GID3 FTQ, add -> GID1 PRF
    for (int i = 0; i < 4; i++) begin
      ft_entry_t e;
      for (int f3 = 0; f3 < 4; f3++) begin
        if (i >= 2 && f3 != 0) continue;
        e.gid    = (i == 3) ? 2'd1 : 2'(i + 1);
        e.dp_sel = (i == 3) ? DP_PRF : dp_sel_e'(i + 1);
        @(negedge clk_core);
        cfg_ft_we = 1; cfg_ft_addr = {3'(f3), opcs[i]}; cfg_ft_data = e;
      end
    end
    @(negedge clk_core) cfg_ft_we = 0;
    // distributor: GID1 -> SE0, GID2 -> SE0+SE1, GID3 -> SE1
    for (int g = 0; g < 4; g++) begin
      @(negedge clk_core);
      cfg_dist_we = 1; cfg_dist_gid = 2'(g);
      cfg_dist_se_bitmap = (g == 1) ? 4'b0001 : (g == 2) ? 4'b0011 : (g == 3) ? 4'b0010 : 4'b0000;
    end
    @(negedge clk_core) cfg_dist_we = 0;
    @(negedge clk_core) cfg_se_we = 4'b0001; cfg_se_policy = POL_RR;    cfg_se_members = 12'h03F;
    @(negedge clk_core) cfg_se_we = 4'b0010; cfg_se_policy = POL_BLOCK; cfg_se_members = 12'hFC0;
    @(negedge clk_core) cfg_se_we = 0;

    for (int a = 0; a < NAE; a++) begin
      automatic int aa = a;
      fork kernel(aa); join_none
    end

    pc = 40'h8000_0000;
    prev_pc = '0;
    retired = 0;
    while (retired < N_INSTR) begin
      @(negedge clk_core);
      // queue tops of the previous cycle's commit
      for (int x = 0; x < L; x++) begin
        ldq_top[x] = qval(prev_pc[x], 1);
        stq_top[x] = qval(prev_pc[x], 2);
        ftq_top[x] = qval(prev_pc[x], 3);
      end
      for (int p = 0; p < P; p++) begin
        iq_ren[p] = 1'($urandom_range(0, 1));
        iq_raddr[p] = 7'($urandom);
      end
      commit_valid = 0;
      if (!commit_stall) begin
        for (int x = 0; x < L; x++) begin
          int k;
          logic [2:0] f3;
          commit_valid[x] = ($urandom_range(0, 9) < 8);
          if (!commit_valid[x]) continue;
          k  = $urandom_range(0, 4);
          f3 = (k < 2) ? 3'($urandom_range(0, 3)) : 3'd0;
          commit_inst[x]    = {17'($urandom), f3, 5'($urandom), opcs[k]};
          commit_pc[x]      = pc;
          commit_prf_idx[x] = 7'($urandom);
          prev_pc[x]        = pc;
          if (k < 4) begin
            exp_t e;
            e.gid  = (k == 3) ? 2'd1 : 2'(k + 1);
            e.inst = commit_inst[x];
            e.data = (k == 3) ? prf[commit_prf_idx[x]] : qval(pc, k + 1);
            e.gotA = 0; e.gotB = 0; e.engA = -1; e.engB = -1;
            exp_tab[pc] = e;
            pc_list.push_back(pc);
          end
          pc += 4;
          retired++;
        end
      end
    end
    @(negedge clk_core) commit_valid = 0;
    for (int x = 0; x < L; x++) begin
      ldq_top[x] = qval(prev_pc[x], 1);
      stq_top[x] = qval(prev_pc[x], 2);
      ftq_top[x] = qval(prev_pc[x], 3);
    end

    // drain
    begin
      int waited;
      bit done;
      waited = 0;
      done = 0;
      while (!done && waited < 40000) begin
        repeat (100) @(posedge clk_core);
        waited += 100;
        done = (msgs_got == msgs_sent);
        foreach (pc_list[i]) begin
          exp_t e;
          e = exp_tab[pc_list[i]];
          if ((e.gid != 3 && e.gotA == 0) || (e.gid != 1 && e.gotB == 0)) done = 0;
        end
      end
    end
    stop_kernels = 1;
    repeat (50) @(posedge clk_ae);

    // delivery and scheduling checks
    begin
      int switchA, switchB, nA, nB, lastA, lastB;
      switchA = 0; switchB = 0; nA = 0; nB = 0; lastA = -1; lastB = -1;
      foreach (pc_list[i]) begin
        exp_t e;
        e = exp_tab[pc_list[i]];
        check(e.gotA == ((e.gid != 3) ? 1 : 0), $sformatf("kernel A copies of pc %h", pc_list[i]));
        check(e.gotB == ((e.gid != 1) ? 1 : 0), $sformatf("kernel B copies of pc %h", pc_list[i]));
        if (e.engA >= 0) begin nA++; if (lastA >= 0 && e.engA != lastA) switchA++; lastA = e.engA; end
        if (e.engB >= 0) begin nB++; if (lastB >= 0 && e.engB != lastB) switchB++; lastB = e.engB; end
      end
      $display("instructions %0d relevant %0d kernelA %0d (switches %0d) kernelB %0d (switches %0d)",
               N_INSTR, pc_list.size(), nA, switchA, nB, switchB);
      $display("stall %0d contention %0d multicast %0d holdback %0d routed %0d msgs %0d/%0d recent %0d",
               n_stall, n_contention, n_multicast, n_holdback, n_routed, msgs_got, msgs_sent, n_recent);
      check(switchA * 4 > nA, "round robin alternates engines of kernel A");
      check(switchB > 0 && switchB * 4 < nB, "block mode keeps a target until it is full");
      check(msgs_sent > 0 && msgs_got == msgs_sent, "all routed messages delivered");
      check(n_stall > 0, "commit stall happened");
      check(n_contention > 0, "PRF read-port contention happened");
      check(n_multicast > 0, "multicast happened");
      check(n_holdback > 0, "allocator hold-back happened");
      check(n_routed > 0, "routed delivery happened");
      check(n_status > 0, "status register access happened");
      check(n_recent > 0, "RECENT used");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
