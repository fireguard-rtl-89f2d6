// tb_allocator: self-checking test of the allocator (distributor + SEs).
//
// Configuration: GID 1 goes to SE 0, GID 2 to SEs 0 and 1, GID 3 to SE 2,
// GID 0 to nobody.  SE 0 schedules engines {0,1} round robin, SE 1 engines
// {2,3} in block mode, SE 2 engine {3} with fixed priority.  Random packets
// arrive with random engine room.  A reference model with its own previous
// targets predicts, at each accepted packet, in_ready and the engine bitmap
// (one engine per interested SE, ORed); the packet must then be written,
// unchanged and in order, to exactly those engines.  Also checked: GID 2
// reaches two engines at once (multicast), and with full room one packet is
// written per cycle, one cycle after it was taken.
module tb_allocator;
  import fireguard_pkg::*;

  localparam int S = 4, N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             cfg_dist_we, in_valid, in_ready;
  logic [1:0]       cfg_dist_gid;
  logic [S-1:0]     cfg_dist_se_bitmap, cfg_se_we;
  sched_pol_e       cfg_se_policy;
  logic [N-1:0]     cfg_se_members, ae_room, out_wr, ae_bitmap;
  fg_pkt_t          in_pkt, out_pkt;

  allocator #(.NUM_SE(S), .NUM_AE(N)) dut (.*);

  int checks = 0, failures = 0, multicasts = 0;
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

  logic [S-1:0] dist_tab [4] = '{4'b0000, 4'b0001, 4'b0011, 4'b0100};
  logic [N-1:0] memb [S] = '{4'b0011, 4'b1100, 4'b1000, 4'b0000};
  sched_pol_e   pols [S] = '{POL_RR, POL_BLOCK, POL_FIXED, POL_FIXED};
  int           prev [S] = '{0, 0, 0, 0};

  function automatic int pick(input sched_pol_e pol, input logic [N-1:0] avail, input int pv);
    if (pol == POL_FIXED) begin
      for (int i = 0; i < N; i++) if (avail[i]) return i;
      return -1;
    end
    if (pol == POL_BLOCK && avail[pv]) return pv;
    for (int k = 1; k <= N; k++) if (avail[(pv + k) % N]) return (pv + k) % N;
    return -1;
  endfunction

  typedef struct { fg_pkt_t p; logic [N-1:0] bm; } exp_t;
  exp_t expq [$];
  int tag = 0;

  // reference: decide at the accepting edge
  always @(posedge clk) if (rst_n) begin
    logic ok;
    logic [N-1:0] bm;
    int t [S];
    ok = 1; bm = '0;
    for (int s = 0; s < S; s++) begin
      t[s] = -1;
      if (dist_tab[in_pkt.gid][s] && memb[s] != 0) begin
        t[s] = pick(pols[s], memb[s] & ae_room, prev[s]);
        if (t[s] < 0) ok = 0;
      end
    end
    if (out_wr != 0) begin
      if (expq.size() == 0) check(0, "unexpected write");
      else begin
        exp_t e;
        e = expq.pop_front();
        check(out_pkt == e.p && out_wr == e.bm, $sformatf("write bitmap %b exp %b", out_wr, e.bm));
        check((out_wr & ~ae_room) == 0, "write only with room");
      end
    end
    if (in_valid) begin
      if (in_ready) begin
        check(ok, "took a packet no engine could receive");
        for (int s = 0; s < S; s++) if (t[s] >= 0) begin
          bm[t[s]] = 1'b1;
          prev[s] = t[s];
        end
        if (bm != 0) expq.push_back('{in_pkt, bm});
        if ($countones(bm) > 1) multicasts++;
      end
    end
  end

  task automatic cfg();
    for (int g = 0; g < 4; g++) begin
      @(negedge clk);
      cfg_dist_we = 1; cfg_dist_gid = 2'(g); cfg_dist_se_bitmap = dist_tab[g];
    end
    @(negedge clk) cfg_dist_we = 0;
    for (int s = 0; s < S; s++) begin
      @(negedge clk);
      cfg_se_we = 4'b1 << s; cfg_se_policy = pols[s]; cfg_se_members = memb[s];
    end
    @(negedge clk) cfg_se_we = 0;
  endtask

  initial begin
    int w0, cyc;
    cfg_dist_we = 0; cfg_dist_gid = 0; cfg_dist_se_bitmap = 0; cfg_se_we = 0;
    cfg_se_policy = POL_FIXED; cfg_se_members = 0; in_valid = 0; in_pkt = '0; ae_room = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cfg();
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid = ($urandom_range(0, 3) != 0);
        in_pkt = '{debug_data: 64'(tag), pc: 40'($urandom), inst: 32'($urandom), gid: 2'($urandom)};
        tag++;
      end
      ae_room = (n % 400 < 200) ? 4'b1111 : 4'($urandom);
    end
    // throughput: 50 GID-1 packets back to back with full room
    @(negedge clk);
    ae_room = '1;
    in_valid = 0;
    repeat (3) @(negedge clk);
    w0 = 0; cyc = 0;
    in_valid = 1;
    for (int k = 0; k < 50; k++) begin
      in_pkt = '{debug_data: 64'(tag), pc: 40'(k), inst: 32'h33, gid: 2'd1};
      tag++;
      #1 check(in_ready, "ready every cycle with room");
      @(negedge clk);
      if (out_wr != 0) w0++;
    end
    in_valid = 0;
    @(negedge clk) if (out_wr != 0) w0++;
    check(w0 == 50, $sformatf("50 writes in 51 cycles, got %0d", w0));
    repeat (5) @(negedge clk);
    check(expq.size() == 0, "all packets written");
    check(multicasts > 50, "multicast exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
