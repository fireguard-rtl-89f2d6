// tb_reorder_arbiter: self-checking test of the reorder FIFOs and arbiter.
//
// Phase 1 replays the two-row example of the paper's reordering figure (row 1
// valid in lanes 0 and 2, row 2 valid in lanes 0, 1 and 3) and checks the
// output order P0.1, P2.1, P0.2, P1.2, P3.2 in five consecutive cycles.
// Phase 2 pushes random rows (honouring row_ready) against a random
// out_ready and compares every output packet with a reference queue built
// in commit order.  Phase 3 pushes 16 full rows and checks that the arbiter
// sends one packet per cycle (64 packets in 64 cycles).
module tb_reorder_arbiter;
  import fireguard_pkg::*;

  localparam int LANES = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               row_push, row_ready, almost_full, out_valid, out_ready;
  logic [LANES-1:0]   row_valid;
  fg_pkt_t [LANES-1:0] row_pkt;
  fg_pkt_t            out_pkt;

  reorder_arbiter #(.LANES(LANES), .DEPTH(16)) dut (.*);

  int checks = 0, failures = 0;
  fg_pkt_t expq [$];
  int got = 0;
  bit verbose = 1;
  bit done_p2 = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (verbose) $display("FAIL %s", what);
    end
  endtask

  function automatic fg_pkt_t mk(input int tag);
    fg_pkt_t p;
    p.debug_data = {32'($urandom), 32'(tag)};
    p.pc         = 40'(tag * 4);
    p.inst       = 32'($urandom);
    p.gid        = 2'(1 + tag % 3);
    return p;
  endfunction

  // output monitor
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    fg_pkt_t e;
    got++;
    if (expq.size() == 0) check(0, "unexpected packet");
    else begin
      e = expq.pop_front();
      check(out_pkt == e, $sformatf("packet order/content, got tag %0d", out_pkt.debug_data[31:0]));
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push_row(input logic [LANES-1:0] v, input int base);
    @(negedge clk);
    while (!row_ready || almost_full) @(negedge clk);
    row_push = 1; row_valid = v;
    for (int l = 0; l < LANES; l++) begin
      row_pkt[l] = mk(base + l);
      if (v[l]) expq.push_back(row_pkt[l]);
    end
    @(negedge clk);
    row_push = 0;
  endtask

  initial begin
    int t0, t1, cyc;
    row_push = 0; row_valid = 0; row_pkt = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- phase 1: the figure's example ----
    @(negedge clk);
    row_push = 1; row_valid = 4'b0101;
    for (int l = 0; l < LANES; l++) row_pkt[l] = mk(100 + l);
    expq.push_back(row_pkt[0]); expq.push_back(row_pkt[2]);
    @(negedge clk);
    row_valid = 4'b1011;
    for (int l = 0; l < LANES; l++) row_pkt[l] = mk(200 + l);
    expq.push_back(row_pkt[0]); expq.push_back(row_pkt[1]); expq.push_back(row_pkt[3]);
    @(negedge clk);
    row_push = 0; out_ready = 1;
    cyc = 0;
    while (expq.size() != 0 && cyc < 20) begin
      @(posedge clk); #1 cyc++;
    end
    check(cyc == 5, $sformatf("figure example took %0d cycles, expected 5", cyc));

    // ---- phase 2: random ----
    fork
      begin
        for (int r = 0; r < 2000; r++) push_row(4'($urandom), 1000 + r * 4);
        done_p2 = 1;
      end
      begin
        while (!done_p2) begin
          @(negedge clk) out_ready = ($urandom_range(0, 2) != 0);
        end
      end
    join
    out_ready = 1;
    repeat (100) @(posedge clk);
    check(expq.size() == 0, "all random packets delivered");

    // ---- phase 3: throughput ----
    out_ready = 0;
    for (int r = 0; r < 15; r++) push_row(4'b1111, 20000 + r * 4);
    check(almost_full, "almost_full with 15 of 16 rows");
    @(negedge clk);
    row_push = 1; row_valid = 4'b1111;
    for (int l = 0; l < LANES; l++) begin
      row_pkt[l] = mk(30000 + l);
      expq.push_back(row_pkt[l]);
    end
    @(negedge clk);
    row_push = 0;
    check(!row_ready, "full after 16 rows");
    @(negedge clk);
    out_ready = 1;
    t0 = got;
    repeat (64) @(posedge clk);
    #1 t1 = got;
    check(t1 - t0 == 64, $sformatf("64 packets in 64 cycles, got %0d", t1 - t0));
    check(expq.size() == 0, "throughput burst drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
