// tb_fireguard_workloads: three guardian kernels of the evaluated kind run at
// once on the default-size design, with injected violations.
//
// Filter set-up: calls (jal, every funct3 because jal has immediate bits
// there) are GID 1 and forward the link register from the register file;
// returns (jalr) are GID 2 and forward the jump target; loads and stores are
// GID 3 and forward their address.
// Kernels (modelled through the ISAX ports, slow clock):
//   shadow stack  SE 0, fixed policy, engine 0: pushes link values, checks
//                 every return target against the top of its stack;
//   sanitizer     SE 1, round robin over engines 1-2: flags any access inside
//                 a poisoned 256-byte region; a flagging engine sends the PC
//                 to engine 0 over the routing channel as its error report;
//   counter       SE 2, fixed policy, engine 3: counts loads and stores.
// The core model injects a few corrupted return addresses and a few
// accesses into the poisoned region.  Checks: the shadow stack reports
// exactly the corrupted returns, the sanitizer reports (via the mesh)
// exactly the poisoned accesses, and the counter matches the number of
// memory instructions retired.
module tb_fireguard_workloads;
  import fireguard_pkg::*;

  localparam int L = 4, P = 4, NAE = 4, NSE = 4;
  localparam int N_INSTR = 3000;
  localparam logic [63:0] POISON = 64'h0000_5000_0000_0000;

  logic clk_core = 0, clk_ae = 0, rst_core_n = 0, rst_ae_n = 0;
  always #5  clk_core = ~clk_core;
  always #10 clk_ae   = ~clk_ae;

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

  fireguard_top dut (.*);

  logic [63:0] prf [128];
  always_comb for (int p = 0; p < P; p++) prf_rdata[p] = prf[prf_raddr[p]];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk_core);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- ucore kernels ----------------
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
    @(posedge clk_ae);
    #1 isax_req_valid[a] = 0;
  endtask

  logic [39:0] ss_reports [$];      // shadow-stack violations (PC of the return)
  logic [39:0] asan_reports [$];    // sanitizer reports received by engine 0
  int          pmc_count = 0;
  int          busy_cnt = 0;
  bit          stop_kernels = 0;

  task automatic kernel(input int a);
    logic [63:0] r, d, pcw, g, shadow [$];
    if (a == 1 || a == 2) begin
      isax(a, OP_STAT_WR, 64'(STAT_DEST), 64'd0, r);   // reports go to engine 0
    end
    while (!stop_kernels) begin
      isax(a, OP_COUNT, 0, 0, r);
      if (r == 0) continue;
      busy_cnt++;
      isax(a, OP_TOP, 64'd74, 0, d);
      isax(a, OP_POP, 64'd34, 0, pcw);
      isax(a, OP_RECENT, 64'd0, 0, g);
      case (a)
        0: begin
          if (g[1:0] == 2'd0) asan_reports.push_back(d[39:0]);   // routed report
          else if (g[1:0] == 2'd1) shadow.push_back(d);
          else if (g[1:0] == 2'd2) begin
            if (shadow.size() == 0 || shadow.pop_back() != d) ss_reports.push_back(pcw[39:0]);
          end
        end
        1, 2: if (d >= POISON && d < POISON + 256) isax(a, OP_PUSH, 64'(pcw[39:0]), 0, r);
        3: pmc_count++;
        default: ;
      endcase
      repeat ($urandom_range(0, 2)) @(posedge clk_ae);
    end
  endtask

  // ---------------- program model ----------------
  logic [39:0] exp_ss [$], exp_asan [$];
  int          exp_mem = 0;

  initial begin
    logic [39:0] pc;
    logic [L-1:0][63:0] nl, ns, nf;
    logic [63:0] ret_stack [$];
    int retired, calls;
    for (int i = 0; i < 128; i++) prf[i] = 0;
    cfg_ft_we = 0; cfg_ft_addr = 0; cfg_ft_data = '0; cfg_dist_we = 0; cfg_dist_gid = 0;
    cfg_dist_se_bitmap = 0; cfg_se_we = 0; cfg_se_policy = POL_FIXED; cfg_se_members = 0;
    commit_valid = 0; commit_inst = 0; commit_pc = 0; commit_prf_idx = 0;
    iq_ren = 0; iq_raddr = 0; ldq_top = 0; stq_top = 0; ftq_top = 0;
    isax_req_valid = 0; isax_req_op = '{default: OP_COUNT}; isax_req_rd = 0;
    isax_req_rs1 = 0; isax_req_rs2 = 0;
    repeat (4) @(posedge clk_ae);
    rst_core_n = 1; rst_ae_n = 1;
    // filter tables
    for (int f3 = 0; f3 < 8; f3++) begin
      @(negedge clk_core);
      cfg_ft_we = 1; cfg_ft_addr = {3'(f3), 7'h6F}; cfg_ft_data = '{gid: 2'd1, dp_sel: DP_PRF};
    end
    @(negedge clk_core) cfg_ft_addr = {3'd0, 7'h67}; cfg_ft_data = '{gid: 2'd2, dp_sel: DP_FTQ};
    @(negedge clk_core) cfg_ft_addr = {3'd3, 7'h03}; cfg_ft_data = '{gid: 2'd3, dp_sel: DP_LDQ};
    @(negedge clk_core) cfg_ft_addr = {3'd3, 7'h23}; cfg_ft_data = '{gid: 2'd3, dp_sel: DP_STQ};
    @(negedge clk_core) cfg_ft_we = 0;
    // GID1,2 -> SE0 (shadow stack); GID3 -> SE1 (sanitizer) + SE2 (counter)
    for (int g = 1; g < 4; g++) begin
      @(negedge clk_core);
      cfg_dist_we = 1; cfg_dist_gid = 2'(g);
      cfg_dist_se_bitmap = (g == 3) ? 4'b0110 : 4'b0001;
    end
    @(negedge clk_core) cfg_dist_we = 0;
    @(negedge clk_core) cfg_se_we = 4'b0001; cfg_se_policy = POL_FIXED; cfg_se_members = 4'b0001;
    @(negedge clk_core) cfg_se_we = 4'b0010; cfg_se_policy = POL_RR;    cfg_se_members = 4'b0110;
    @(negedge clk_core) cfg_se_we = 4'b0100; cfg_se_policy = POL_FIXED; cfg_se_members = 4'b1000;
    @(negedge clk_core) cfg_se_we = 0;

    for (int a = 0; a < NAE; a++) begin
      automatic int aa = a;
      fork kernel(aa); join_none
    end

    pc = 40'h1_0000;
    retired = 0;
    calls = 0;
    nl = '0; ns = '0; nf = '0;
    while (retired < N_INSTR) begin
      @(negedge clk_core);
      ldq_top = nl; stq_top = ns; ftq_top = nf;
      commit_valid = 0;
      if (!commit_stall) begin
        for (int x = 0; x < L; x++) begin
          int k;
          commit_valid[x] = ($urandom_range(0, 3) != 0);
          if (!commit_valid[x]) continue;
          k = $urandom_range(0, 9);
          if (k == 0 && ret_stack.size() < 16) k = 100;        // call
          else if (k == 1 && ret_stack.size() > 0) k = 101;    // return
          commit_pc[x] = pc;
          commit_prf_idx[x] = 7'(x);
          case (k)
            100: begin
              commit_inst[x] = {20'($urandom), 5'd1, 7'h6F};
              // a renamed link register, not reused for many cycles
              commit_prf_idx[x] = 7'(8 + calls % 112);
              prf[8 + calls % 112] = {24'h0, pc + 40'd4};
              calls++;
              ret_stack.push_back({24'h0, pc + 40'd4});
            end
            101: begin
              commit_inst[x] = {12'd0, 5'd1, 3'd0, 5'd0, 7'h67};
              nf[x] = ret_stack.pop_back();
              if ($urandom_range(0, 49) == 0) begin                 // corrupted return
                nf[x] ^= 64'h40;
                exp_ss.push_back(pc);
              end
            end
            2, 3, 4: begin
              logic [63:0] addr;
              addr = 64'h0000_1000_0000_0000 + 64'($urandom);
              if ($urandom_range(0, 59) == 0) begin                 // poisoned access
                addr = POISON + 64'($urandom_range(0, 255));
                exp_asan.push_back(pc);
              end
              if (k == 2) begin commit_inst[x] = {17'($urandom), 3'd3, 5'($urandom), 7'h23}; ns[x] = addr; end
              else        begin commit_inst[x] = {17'($urandom), 3'd3, 5'($urandom), 7'h03}; nl[x] = addr; end
              exp_mem++;
            end
            default: commit_inst[x] = {25'($urandom), 7'h13};      // untracked ALU op
          endcase
          pc += 4;
          retired++;
        end
      end
    end
    @(negedge clk_core) commit_valid = 0;
    ldq_top = nl; stq_top = ns; ftq_top = nf;

    begin
      int waited;
      waited = 0;
      while (waited < 60000 && (pmc_count < exp_mem || asan_reports.size() < exp_asan.size())) begin
        repeat (100) @(posedge clk_core);
        waited += 100;
      end
    end
    repeat (200) @(posedge clk_ae);
    stop_kernels = 1;
    repeat (20) @(posedge clk_ae);

    $display("memory ops %0d counted %0d; corrupted returns %0d reported %0d; poisoned %0d reported %0d",
             exp_mem, pmc_count, exp_ss.size(), ss_reports.size(), exp_asan.size(), asan_reports.size());
    check(pmc_count == exp_mem, "counter kernel saw every load and store");
    check(exp_ss.size() > 0 && exp_asan.size() > 0, "violations were injected");
    check(ss_reports.size() == exp_ss.size(), "shadow stack report count");
    foreach (exp_ss[i]) check(i < ss_reports.size() && ss_reports[i] == exp_ss[i], "shadow stack report pc");
    check(asan_reports.size() == exp_asan.size(), "sanitizer report count");
    asan_reports.sort();
    foreach (exp_asan[i]) check(i < asan_reports.size() && asan_reports[i] == exp_asan[i], "sanitizer report pc");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
