// tb_cdc_fifo: self-checking test of the clock-crossing queue.
//
// Writer clock period 3.1 ns, reader clock period 6.7 ns (about the 2:1
// ratio of core and analysis clocks, but not phase-locked).  Checks: the
// queue accepts exactly DEPTH = 8 words before reporting full; a word
// written into an empty queue becomes visible within 2 to 3 read clocks;
// under random writes and reads every word arrives once, in order, intact.
module tb_cdc_fifo;
  localparam int W = 138, D = 8;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  always #1.55 wclk = ~wclk;
  always #3.35 rclk = ~rclk;

  logic         wr, wfull, rd, rempty;
  logic [W-1:0] wdata, rdata;

  cdc_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] expq [$];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd();
    return {10'($urandom), {4{32'($urandom)}}};
  endfunction

  bit reading = 0;
  always @(posedge rclk) if (rrst_n && rd && !rempty) begin
    if (expq.size() == 0) check(0, "read from empty");
    else check(rdata == expq.pop_front(), "data order");
  end

  initial begin
    int n, lat;
    wr = 0; rd = 0; wdata = 0;
    #20 wrst_n = 1; rrst_n = 1;
    // fill without reading
    n = 0;
    for (int k = 0; k < 12; k++) begin
      @(negedge wclk);
      if (!wfull) begin
        wr = 1; wdata = rnd(); expq.push_back(wdata); n++;
      end else wr = 0;
    end
    @(negedge wclk) wr = 0;
    check(n == D, $sformatf("accepted %0d words before full", n));
    // drain
    repeat (4) @(negedge rclk);
    rd = 1;
    while (expq.size() != 0) @(negedge rclk);
    rd = 0;
    repeat (6) @(negedge rclk);
    check(rempty, "empty after drain");
    // latency of one word
    @(negedge wclk);
    wr = 1; wdata = rnd(); expq.push_back(wdata);
    @(negedge wclk) wr = 0;
    lat = 0;
    @(posedge rclk);
    while (rempty && lat < 10) begin @(posedge rclk); lat++; end
    check(lat >= 1 && lat <= 3, $sformatf("crossing latency %0d read clocks", lat));
    @(negedge rclk) rd = 1;
    @(negedge rclk) rd = 0;
    // random traffic
    fork
      for (int k = 0; k < 3000; k++) begin
        @(negedge wclk);
        wr = 0;
        if (!wfull && $urandom_range(0, 2) != 0) begin
          wr = 1; wdata = rnd(); expq.push_back(wdata);
        end
      end
      for (int k = 0; k < 2500; k++) @(negedge rclk) rd = ($urandom_range(0, 2) != 0);
    join
    @(negedge wclk) wr = 0;
    rd = 1;
    repeat (40) @(negedge rclk);
    check(expq.size() == 0, "all words crossed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
