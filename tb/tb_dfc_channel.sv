// tb_dfc_channel: self-checking test of the data-forwarding channel.
//
// A 128 x 64-bit register file lives in the testbench and answers the PRF
// read ports combinationally.  Each cycle random instructions retire on the
// four commit lanes with random physical-register indices, and the issue
// queue drives random reads on every read controller.  One cycle after
// retirement the testbench plays the filter and raises prf_sel on random
// lanes.  Checks: the held PC/instruction equal the previous cycle's commit;
// a selected lane takes its read port with the retired instruction's index
// and gets that register's value, the issue-queue read on that port is
// stalled; unselected ports serve the issue queue; queue tops pass through.
module tb_dfc_channel;
  import fireguard_pkg::*;

  localparam int L = 4, P = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [L-1:0]               commit_valid, held_valid, prf_sel;
  logic [L-1:0][31:0]         commit_inst, held_inst;
  logic [L-1:0][39:0]         commit_pc, held_pc;
  logic [L-1:0][6:0]          commit_prf_idx;
  logic [P-1:0]               iq_ren, iq_stall, prf_ren;
  logic [P-1:0][6:0]          iq_raddr, prf_raddr;
  logic [P-1:0][63:0]         iq_rdata, prf_rdata;
  logic [L-1:0][63:0]         ldq_top, stq_top, ftq_top;
  logic [L-1:0][63:0]         fwd_prf_data, fwd_ldq_data, fwd_stq_data, fwd_ftq_data;

  dfc_channel #(.LANES(L), .NUM_RD_PORTS(P)) dut (.*);

  logic [63:0] prf [128];
  always_comb for (int p = 0; p < P; p++) prf_rdata[p] = prf[prf_raddr[p]];

  int checks = 0, failures = 0, preempts = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [L-1:0]       pv;
    logic [L-1:0][31:0] pi;
    logic [L-1:0][39:0] pp;
    logic [L-1:0][6:0]  px;
    for (int i = 0; i < 128; i++) prf[i] = {32'($urandom), 32'($urandom)};
    commit_valid = 0; commit_inst = 0; commit_pc = 0; commit_prf_idx = 0;
    prf_sel = 0; iq_ren = 0; iq_raddr = 0; ldq_top = 0; stq_top = 0; ftq_top = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    pv = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // filter answer for the previous commit
      for (int x = 0; x < L; x++) prf_sel[x] = pv[x] && ($urandom_range(0, 1) == 1);
      for (int p = 0; p < P; p++) begin
        iq_ren[p] = $urandom_range(0, 1);
        iq_raddr[p] = 7'($urandom);
      end
      for (int x = 0; x < L; x++) begin
        ldq_top[x] = {32'($urandom), 32'($urandom)};
        stq_top[x] = {32'($urandom), 32'($urandom)};
        ftq_top[x] = {32'($urandom), 32'($urandom)};
      end
      #1;
      for (int x = 0; x < L; x++) begin
        check(held_valid[x] == pv[x], "held valid");
        if (pv[x]) check(held_inst[x] == pi[x] && held_pc[x] == pp[x], "held inst/pc");
        if (prf_sel[x]) begin
          preempts++;
          check(prf_ren[x] && prf_raddr[x] == px[x], "preempted port address");
          check(fwd_prf_data[x] == prf[px[x]], "forwarded PRF data");
          check(iq_stall[x] == iq_ren[x], "issue queue stalled on contention");
        end else begin
          check(prf_ren[x] == iq_ren[x] && !iq_stall[x], "issue queue keeps its port");
          if (iq_ren[x]) check(prf_raddr[x] == iq_raddr[x] && iq_rdata[x] == prf[iq_raddr[x]], "issue read");
        end
        check(fwd_ldq_data[x] == ldq_top[x] && fwd_stq_data[x] == stq_top[x] &&
              fwd_ftq_data[x] == ftq_top[x], "queue tops");
      end
      // new commits
      for (int x = 0; x < L; x++) begin
        commit_valid[x]   = $urandom_range(0, 3) != 0;
        commit_inst[x]    = 32'($urandom);
        commit_pc[x]      = {8'h0, 32'($urandom)};
        commit_prf_idx[x] = 7'($urandom);
      end
      pv = commit_valid; pi = commit_inst; pp = commit_pc; px = commit_prf_idx;
    end
    check(preempts > 100, "preemption exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
