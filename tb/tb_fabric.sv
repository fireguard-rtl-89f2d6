// tb_fabric: self-checking test of the fabric network (2 x 2 mesh).
//
// Each of the four engines has a model crossing queue offering filtered
// packets (multicast channel) and an output queue offering flits to random
// destinations (routing channel); input-queue room is random.  Checks:
// filtered packets reach their engine's input queue in order and unchanged,
// and win over routed packets in the same cycle; every routed flit reaches
// its destination's input queue as a GID-0 packet carrying the payload and
// the sender id, in order per sender/receiver pair, including flits that
// need two hops; nothing is lost.
module tb_fabric;
  import fireguard_pkg::*;

  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    [N-1:0] mc_valid, mc_pop, iq_push, iq_room, oq_valid, oq_pop, routed_deliver;
  fg_pkt_t [N-1:0] mc_pkt, iq_pkt;
  flit_t   [N-1:0] oq_flit;

  fabric #(.NUM_AE(N), .MESH_X(2)) dut (.*);

  int checks = 0, failures = 0, two_hop = 0, mc_seen = 0;
  fg_pkt_t mcq [N][$];          // packets offered by each crossing queue
  logic [63:0] rq [N][N][$];    // payloads [src][dst]
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

  always @(posedge clk) if (rst_n) begin
    for (int e = 0; e < N; e++) begin
      if (iq_push[e]) begin
        check(iq_room[e], "push only with room");
        if (mc_valid[e]) begin
          check(mc_pop[e] && iq_pkt[e] == mc_pkt[e], "filtered packet has priority and passes intact");
          mc_seen++;
        end else begin
          int s;
          s = int'(iq_pkt[e].pc);
          check(iq_pkt[e].gid == 0 && s < N, "routed packet marked GID 0");
          if (s < N) begin
            if (rq[s][e].size() == 0) check(0, "unexpected routed packet");
            else check(iq_pkt[e].debug_data == rq[s][e].pop_front(), "routed payload order");
            if (s == (3 - e)) two_hop++;
          end
        end
      end else check(!mc_pop[e], "no pop without push");
      if (oq_valid[e] && oq_pop[e]) rq[e][int'(oq_flit[e].dst)].push_back(oq_flit[e].data);
    end
  end

  initial begin
    mc_valid = 0; mc_pkt = '0; iq_room = 0; oq_valid = 0; oq_flit = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      for (int e = 0; e < N; e++) begin
        if (!mc_valid[e] || mc_pop[e]) begin
          mc_valid[e] = (n < 5000) && ($urandom_range(0, 3) == 0);
          mc_pkt[e] = '{debug_data: {32'(e), 32'(n)}, pc: 40'h1000 + 40'(n), inst: 32'($urandom), gid: 2'($urandom_range(1, 3))};
        end
        if (!oq_valid[e] || oq_pop[e]) begin
          oq_valid[e] = (n < 5000) && ($urandom_range(0, 2) == 0);
          oq_flit[e] = '{dst: 4'($urandom_range(0, 3)), src: 4'(e), data: {32'($urandom), 32'(n)}};
        end
        iq_room[e] = ($urandom_range(0, 4) != 0);
      end
    end
    @(negedge clk);
    mc_valid = 0; oq_valid = 0; iq_room = '1;
    repeat (30) @(negedge clk);
    for (int s = 0; s < N; s++) for (int d = 0; d < N; d++) check(rq[s][d].size() == 0, "routed flits all delivered");
    check(two_hop > 50, "two-hop routes used");
    check(mc_seen > 500, "multicast packets delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
