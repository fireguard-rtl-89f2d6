// tb_scheduling_engine: self-checking test of one scheduling engine.
//
// For each policy the testbench programs a random group of engines and then
// activates the SE with random engine room, sending each scheduled packet
// one or more cycles later (sometimes in the same cycle as the next
// activation).  A behavioural reference keeps its own previous target and
// predicts can_sched and the one-hot AE_Bitmap, which must appear in the
// cycle after activation.  Fixed: lowest member with room; round robin: next
// member with room after the previous target; block: the previous target
// while it has room.  The block-mode check also confirms that a target with
// room receives consecutive packets.
module tb_scheduling_engine;
  import fireguard_pkg::*;

  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             cfg_we, activate, can_sched, sent;
  sched_pol_e       cfg_policy;
  logic [N-1:0]     cfg_members, ae_room, ae_bitmap;

  scheduling_engine #(.NUM_AE(N)) dut (.*);

  int checks = 0, failures = 0, block_repeats = 0, rr_moves = 0;
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

  function automatic int pick(input sched_pol_e pol, input logic [N-1:0] avail, input int prev);
    if (pol == POL_FIXED) begin
      for (int i = 0; i < N; i++) if (avail[i]) return i;
      return -1;
    end
    if (pol == int'(POL_BLOCK) && avail[prev]) return prev;
    for (int k = 1; k <= N; k++) if (avail[(prev + k) % N]) return (prev + k) % N;
    return -1;
  endfunction

  initial begin
    int prev, tgt;
    bit pending;
    logic [N-1:0] mem;
    cfg_we = 0; cfg_policy = POL_FIXED; cfg_members = 0; activate = 0; sent = 0; ae_room = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pol = 0; pol < 3; pol++) begin
      for (int rep = 0; rep < 4; rep++) begin
        @(negedge clk);
        mem = (rep == 0) ? 4'b1111 : 4'($urandom_range(1, 15));
        cfg_we = 1; cfg_policy = sched_pol_e'(pol); cfg_members = mem;
        @(negedge clk);
        cfg_we = 0;
        prev = 0; pending = 0;
        for (int n = 0; n < 400; n++) begin
          // one cycle: optionally send the pending packet, optionally activate
          sent     = pending && ($urandom_range(0, 2) != 0);
          activate = (!pending || sent) && ($urandom_range(0, 3) != 0);
          ae_room  = (n % 50 < 25) ? 4'b1111 : 4'($urandom);
          #1;
          tgt = pick(sched_pol_e'(pol), mem & ae_room, prev);
          if (activate) check(can_sched == (tgt >= 0), "can_sched");
          @(posedge clk);
          if (sent) pending = 0;
          if (activate && tgt >= 0) begin
            if (pol == int'(POL_BLOCK) && tgt == prev) block_repeats++;
            if (pol == int'(POL_RR) && tgt != prev) rr_moves++;
            prev = tgt;
            pending = 1;
          end
          @(negedge clk);
          check(ae_bitmap == (pending ? (4'b1 << prev) : 4'b0), $sformatf("AE_Bitmap pol %0d", pol));
          sent = 0; activate = 0;
        end
      end
    end
    check(block_repeats > 100, "block mode kept its target");
    check(rr_moves > 100, "round robin moved on");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
