// async_fifo: dual-clock FIFO of the buffer module.
//
// The write side offers the plain FIFO interface the user logic expects
// (datain, wrclk, wrreq, wrfull); the read side is clocked by the clock the
// CPU supplies and feeds the SRAM data bus. The read port is show-ahead:
// q always holds the oldest word while rdempty is low, and rdreq (an
// acknowledge) advances to the next one, so the CPU sees valid data at the
// start of every read strobe without any read latency.
//
// How it works: binary write/read pointers one bit wider than the address
// are kept in their own domains and passed across as Gray code through
// SYNC_STAGES flip-flops. Full is detected on the write side against the
// synchronized read pointer, empty and the word count (rdusedw, the "FIFO
// count" the state machine compares with the transmission length) on the read
// side against the synchronized write pointer. Both flags are pessimistic:
// a word written becomes visible to the reader SYNC_STAGES+1 rdclk edges
// later, a word read frees its slot for the writer SYNC_STAGES+1 wrclk edges
// later. The storage is a simple dual-port array with a registered read
// (inferable as FPGA block RAM): the read address is the pointer the read
// side will hold after the current edge, so q is refreshed on the same edge
// the pointer moves.
//
// Timing: a write with wrreq=1 and wrfull=0 is taken at the wrclk edge; a
// write while full is dropped. rdreq=1 with rdempty=0 pops at the rdclk edge
// and q shows the next word right after it. rdreq while empty is ignored.
//
// The source design asks only for an asynchronous FIFO with this interface
// and a count; Gray-code pointers, show-ahead output, the synchronizer depth
// and the default DEPTH (32768 words, enough for the largest 64 KiB
// transmission length measured) are this design's choices.
//
// Lint note: the reset is used both as an asynchronous flop reset and in the
// assertions' `disable iff`, which Verilator reports as SYNCASYNCNET; this is
// intended and harmless.
module async_fifo #(
  parameter int unsigned DATA_W      = 16,
  parameter int unsigned DEPTH       = 32768,   // words, power of two
  parameter int unsigned SYNC_STAGES = 2,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  // write side (user logic)
  input  logic              wrclk,
  input  logic              wrst_n,
  input  logic              wrreq,
  input  logic [DATA_W-1:0] datain,
  output logic              wrfull,
  // read side (CPU clock)
  input  logic              rdclk,
  input  logic              rrst_n,
  input  logic              rdreq,
  output logic [DATA_W-1:0] q,
  output logic              rdempty,
  output logic [AW:0]       rdusedw
);

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  logic [DATA_W-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rgray_w;            // write-side pointers
  logic [AW:0] rbin, rgray, wgray_r, wbin_r, rbin_next;  // read-side pointers
  logic        wpush, rpop;

  // ---------------- write side ----------------
  sync_ff #(.WIDTH(AW+1), .STAGES(SYNC_STAGES)) u_sync_r2w (
    .clk(wrclk), .rst_n(wrst_n), .d(rgray), .q(rgray_w));

  assign wrfull = (wgray == {~rgray_w[AW:AW-1], rgray_w[AW-2:0]});
  assign wpush  = wrreq && !wrfull;

  always_ff @(posedge wrclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin  <= '0;
      wgray <= '0;
    end else if (wpush) begin
      wbin  <= wbin + 1'b1;
      wgray <= bin2gray(wbin + 1'b1);
    end
  end

  always_ff @(posedge wrclk) begin
    if (wpush) mem[wbin[AW-1:0]] <= datain;
  end

  // ---------------- read side ----------------
  sync_ff #(.WIDTH(AW+1), .STAGES(SYNC_STAGES)) u_sync_w2r (
    .clk(rdclk), .rst_n(rrst_n), .d(wgray), .q(wgray_r));

  assign wbin_r    = gray2bin(wgray_r);
  assign rdempty   = (rgray == wgray_r);
  assign rdusedw   = wbin_r - rbin;
  assign rpop      = rdreq && !rdempty;
  assign rbin_next = rbin + {{AW{1'b0}}, rpop};

  always_ff @(posedge rdclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin  <= '0;
      rgray <= '0;
    end else begin
      rbin  <= rbin_next;
      rgray <= bin2gray(rbin_next);
    end
  end

  always_ff @(posedge rdclk) begin
    q <= mem[rbin_next[AW-1:0]];
  end

  // ---------------- rules ----------------
  a_wgray_one_bit: assert property (@(posedge wrclk) disable iff (!wrst_n)
    $countones(wgray ^ $past(wgray)) <= 1);
  a_rgray_one_bit: assert property (@(posedge rdclk) disable iff (!rrst_n)
    $countones(rgray ^ $past(rgray)) <= 1);
  a_count_range: assert property (@(posedge rdclk) disable iff (!rrst_n)
    rdusedw <= (AW+1)'(DEPTH));

endmodule
