// tb_noc_router: self-checking test of one mesh router.
//
// The router sits in the middle of a 3 x 3 mesh (x = 1, y = 1, node 4), so
// every port is used.  Random flits with random destinations enter all five
// ports (respecting in_ready) while the outputs take flits with random
// ready.  Each flit must leave on the port given by XY routing (east/west
// first, then north/south, local when it has arrived), intact, and flits
// from one input to one output must keep their order.  Also checked: an
// uncontended flit crosses in one cycle, and every port pair is exercised.
module tb_noc_router;
  import fireguard_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  [4:0] in_valid, in_ready, out_valid, out_ready;
  flit_t [4:0] in_flit, out_flit;

  noc_router #(.MESH_X(3), .MESH_Y(3), .X(1), .Y(1), .IN_DEPTH(2)) dut (.*);

  int checks = 0, failures = 0;
  flit_t q [5][5][$];      // [input][output]
  int    used [5][5];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int xy_port(input int dst);
    int dx, dy;
    dx = dst % 3; dy = dst / 3;
    if (dx > 1) return 3;
    if (dx < 1) return 4;
    if (dy > 1) return 2;
    if (dy < 1) return 1;
    return 0;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) if (out_valid[o] && out_ready[o]) begin
      int i;
      i = int'(out_flit[o].data[63:60]);
      if (i > 4 || q[i][o].size() == 0) check(0, $sformatf("unexpected flit on port %0d", o));
      else begin
        check(out_flit[o] == q[i][o].pop_front(), $sformatf("flit %0d->%0d", i, o));
        used[i][o]++;
      end
    end
    for (int i = 0; i < 5; i++) if (in_valid[i] && in_ready[i])
      q[i][xy_port(int'(in_flit[i].dst))].push_back(in_flit[i]);
  end

  initial begin
    int lat;
    in_valid = 0; in_flit = '0; out_ready = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // one flit west -> east: destination node 5 (x=2, y=1)
    @(negedge clk);
    in_valid[4] = 1;
    in_flit[4] = '{dst: 4'd5, src: 4'd3, data: {4'd4, 60'h123}};
    @(negedge clk) in_valid = 0;
    lat = 1;
    while (!out_valid[3] && lat < 5) begin @(negedge clk); lat++; end
    check(lat == 1 && out_valid[3], $sformatf("one-hop latency %0d", lat));
    @(negedge clk);
    for (int n = 0; n < 5000; n++) begin
      for (int i = 0; i < 5; i++) begin
        if (!in_valid[i] || in_ready[i]) begin
          in_valid[i] = ($urandom_range(0, 2) != 0);
          in_flit[i] = '{dst: 4'($urandom_range(0, 8)), src: 4'($urandom), data: {4'(i), 60'(n)}};
        end
      end
      out_ready = 5'($urandom) | 5'($urandom);
      @(negedge clk);
    end
    in_valid = 0; out_ready = '1;
    repeat (20) @(negedge clk);
    for (int i = 0; i < 5; i++)
      for (int o = 0; o < 5; o++) begin
        check(q[i][o].size() == 0, "all flits delivered");
        // a flit never turns back to its own port under XY routing, and
        // y-links never turn to x-links
        if (i != o && !((i == 1 || i == 2) && (o == 3 || o == 4)))
          check(used[i][o] > 0, $sformatf("pair %0d->%0d used", i, o));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
