// tb_isax_ifc: self-checking test of the ISAX interface.
//
// The queue controller and the APB status registers are modelled in the
// testbench: the controller answers ctl_rdata as a fixed function of the
// operation and argument and can be told to be busy; the APB slave holds
// sixteen registers.  Random custom instructions are issued as a ucore MA
// stage would, holding each while stall is high.  Checks: queue operations
// complete in their own cycle with the controller's data on both the commit
// (resp) and the EX-forwarding (fwd) outputs; PUSH writes no register and
// stalls while the controller is busy; status reads and writes take exactly
// two cycles with a correct APB setup/access sequence.
module tb_isax_ifc;
  import fireguard_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req_valid, stall, resp_valid, fwd_valid, ctl_valid, ctl_busy;
  isax_op_e    req_op, ctl_op;
  logic [4:0]  req_rd, resp_rd, fwd_rd;
  logic [63:0] req_rs1, req_rs2, resp_data, fwd_data, ctl_arg, ctl_rdata;
  logic        psel, penable, pwrite, pready;
  logic [3:0]  paddr;
  logic [63:0] pwdata, prdata;

  isax_ifc dut (.*);

  // controller model
  logic busy_mode = 0;
  assign ctl_rdata = {32'(ctl_op) * 32'h1111, ctl_arg[31:0] ^ 32'h5A5A_0000};
  assign ctl_busy  = ctl_valid && ctl_op == OP_PUSH && busy_mode;
  // APB slave model
  logic [63:0] regs [16];
  assign pready = 1'b1;
  assign prdata = regs[paddr];
  int apb_writes = 0;
  always @(posedge clk) if (psel && penable && pwrite) begin
    regs[paddr] <= pwdata;
    apb_writes++;
  end

  int checks = 0, failures = 0;
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
    logic [63:0] shadow [16];
    for (int i = 0; i < 16; i++) begin regs[i] = 64'(i) * 3; shadow[i] = 64'(i) * 3; end
    req_valid = 0; req_op = OP_COUNT; req_rd = 0; req_rs1 = 0; req_rs2 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      isax_op_e o;
      int cyc;
      o = isax_op_e'($urandom_range(0, 6));
      @(negedge clk);
      busy_mode = (o == OP_PUSH) && ($urandom_range(0, 1) == 1);
      req_valid = 1; req_op = o; req_rd = 5'($urandom_range(1, 31));
      req_rs1 = {32'($urandom), 32'($urandom)};
      if (o == OP_STAT_RD || o == OP_STAT_WR) req_rs1 = 64'($urandom_range(0, 15));
      req_rs2 = {32'($urandom), 32'($urandom)};
      cyc = 1;
      #1;
      if (o <= OP_PUSH) begin
        check(ctl_valid && ctl_op == o && ctl_arg == req_rs1 && !psel, "routed to queue controller");
        if (o == OP_PUSH) begin
          check(!resp_valid, "push writes no register");
          if (busy_mode) begin
            check(stall, "push stalls while busy");
            @(negedge clk) busy_mode = 0;
            #1 cyc++;
          end
          check(!stall, "push completes");
        end else begin
          check(!stall && resp_valid && resp_rd == req_rd &&
                resp_data == {32'(o) * 32'h1111, req_rs1[31:0] ^ 32'h5A5A_0000},
                "queue op answers in one cycle");
          check(fwd_valid && fwd_rd == req_rd && fwd_data == resp_data, "EX forwarding copy");
        end
      end else begin
        check(!ctl_valid && psel && !penable && stall && !resp_valid, "APB setup cycle");
        @(negedge clk);
        #1 cyc++;
        check(psel && penable && !stall && paddr == req_rs1[3:0], "APB access cycle");
        if (o == OP_STAT_RD)
          check(resp_valid && resp_data == shadow[req_rs1[3:0]] && fwd_data == resp_data, "status read data");
        else begin
          check(!resp_valid && pwrite && pwdata == req_rs2, "status write");
          shadow[req_rs1[3:0]] = req_rs2;
        end
        check(cyc == 2, "status access takes two cycles");
      end
      @(negedge clk);
      req_valid = 0;
      #1 check(!psel && !penable && !stall, "idle after the instruction");
    end
    check(apb_writes > 100, "status writes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
