// tb_mini_filter: self-checking test of one mini-filter.
//
// Programs a handful of table entries (lb, sb, jalr, add, and an instruction
// with a non-zero funct3) and then retires random instructions, some from
// the programmed set, with random commit-valid.  A reference table in the
// testbench predicts GID, DP_Sel and hit; the result must appear exactly one
// cycle after the commit.  Unprogrammed entries must read as GID 0.
module tb_mini_filter;
  import fireguard_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            cfg_we;
  logic [9:0]      cfg_addr;
  ft_entry_t       cfg_data;
  logic            commit_valid;
  logic [31:0]     commit_inst;
  logic            hit;
  logic [1:0]      gid;
  dp_sel_e         dp_sel;

  mini_filter dut (.*);

  int checks = 0, failures = 0;
  ft_entry_t ref_tab [int];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic logic [31:0] mk_inst(input logic [6:0] opc, input logic [2:0] f3);
    return {17'($urandom), f3, 5'($urandom), opc};
  endfunction

  logic [6:0] opcs [6] = '{7'h03, 7'h23, 7'h67, 7'h33, 7'h13, 7'h63};
  logic [2:0] f3s  [6] = '{3'd0, 3'd0, 3'd0, 3'd0, 3'd5, 3'd1};

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic        exp_vld;
    ft_entry_t   exp_e;
    cfg_we = 0; cfg_addr = 0; cfg_data = '0; commit_valid = 0; commit_inst = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // program: lb -> GID1 LDQ, sb -> GID2 STQ, jalr -> GID3 FTQ, add -> GID1 PRF,
    // srli (funct3 5) -> GID2 PRF, bne (funct3 1) -> GID3 FTQ
    for (int i = 0; i < 6; i++) begin
      ft_entry_t e;
      e.gid    = 2'(1 + (i % 3));
      e.dp_sel = dp_sel_e'(i % 4);
      @(negedge clk);
      cfg_we = 1; cfg_addr = {f3s[i], opcs[i]}; cfg_data = e;
      ref_tab[int'({f3s[i], opcs[i]})] = e;
    end
    @(negedge clk) cfg_we = 0;
    check(ref_tab.exists(int'(10'h003)) && ref_tab[int'(10'h003)].gid == 2'd1, "lb entry at 0x003");

    for (int n = 0; n < 3000; n++) begin
      logic [6:0] o;
      logic [2:0] f;
      int k;
      @(negedge clk);
      k = $urandom_range(0, 9);
      if (k < 6) begin o = opcs[k]; f = f3s[k]; end
      else begin o = 7'($urandom); f = 3'($urandom); end
      commit_valid = ($urandom_range(0, 3) != 0);
      commit_inst  = mk_inst(o, f);
      exp_vld = commit_valid && ref_tab.exists(int'({f, o}));
      if (exp_vld) exp_e = ref_tab[int'({f, o})];
      @(posedge clk);
      #1;
      if (exp_vld) begin
        check(gid == exp_e.gid && dp_sel == exp_e.dp_sel && hit, $sformatf("lookup %h", {f, o}));
      end else begin
        check(gid == 2'd0 && !hit, $sformatf("miss %h", {f, o}));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
