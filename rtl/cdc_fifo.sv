// cdc_fifo: clock-domain-crossing queue from the fast core domain to the
// slow analysis domain.
//
// The core, forwarding channel, filter and allocator run on the core clock;
// the fabric, message queues and ucores run on a slower clock.  One of these
// queues per analysis engine carries allocated packets across.  It is the
// classic asynchronous FIFO: a dual-clock array of DEPTH words, binary
// pointers one bit wider than the index, their Gray-code copies passed
// through two-flop synchronisers, full computed in the write domain and empty
// in the read domain, both conservative.
//
// Interface: write side wr/wdata/wfull on wclk, read side rd/rdata/rempty on
// rclk with rdata showing the head word (first-word fall-through).  Timing: a
// word written at a wclk edge becomes visible to the reader two to three rclk
// edges later; freed space reaches the writer likewise.
// DEPTH must be a power of two.  The depth (8) is the paper's; the Gray-code
// pointer scheme is this design's own way of crossing the domains.
module cdc_fifo #(
  parameter int unsigned WIDTH = 138,
  parameter int unsigned DEPTH = 8
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr,
  input  logic [WIDTH-1:0] wdata,
  output logic             wfull,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd,
  output logic [WIDTH-1:0] rdata,
  output logic             rempty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer in the write domain
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer in the read domain
  logic [AW:0] wbin_nx, rbin_nx;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write domain
  assign wbin_nx = wbin + (AW+1)'(wr && !wfull);
  assign wfull   = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_nx;
      wgray    <= bin2gray(wbin_nx);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge wclk) begin
    if (wr && !wfull) mem[wbin[AW-1:0]] <= wdata;
  end

  // read domain
  assign rbin_nx = rbin + (AW+1)'(rd && !rempty);
  assign rempty  = (rgray == wgray_r2);
  assign rdata   = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_nx;
      rgray    <= bin2gray(rbin_nx);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  initial begin
    assert (DEPTH >= 4 && (DEPTH & (DEPTH - 1)) == 0)
      else $error("cdc_fifo: DEPTH must be a power of two, at least 4");
  end
endmodule
