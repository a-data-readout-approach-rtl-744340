// tb_async_fifo: self-checking test of the dual-clock show-ahead FIFO.
//
// Runs a small FIFO (DEPTH 16) with unrelated write and read clocks and
// checks, against a queue model: reset state; fill to full, a write while
// full being dropped, the read-side count reaching DEPTH; in-order drain with
// the show-ahead word valid before each pop; the delay from a write into an
// empty FIFO to rdempty falling (SYNC_STAGES+1 read edges, +1 for phase);
// and a long run of random concurrent pushes and pops.
module tb_async_fifo;
  localparam int DW = 16, DEPTH = 16, SYNC = 2;

  logic wrclk = 0, rdclk = 0, wrst_n = 1, rrst_n = 1;
  logic wrreq = 0, rdreq = 0;
  logic [DW-1:0] datain = '0, q;
  logic wrfull, rdempty;
  logic [$clog2(DEPTH):0] rdusedw;

  int checks = 0, failures = 0;
  logic [DW-1:0] model[$];

  async_fifo #(.DATA_W(DW), .DEPTH(DEPTH), .SYNC_STAGES(SYNC)) dut (.*);

  always #5 wrclk = ~wrclk;
  always #7 rdclk = ~rdclk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  task automatic push(input logic [DW-1:0] d);
    @(negedge wrclk);
    wrreq = 1; datain = d;
    @(posedge wrclk);
    if (!wrfull) model.push_back(d);
    @(negedge wrclk);
    wrreq = 0;
  endtask

  task automatic pop_check();
    logic [DW-1:0] exp;
    @(negedge rdclk);
    if (!rdempty) begin
      exp = model.pop_front();
      check(q == exp, $sformatf("data order: got %h exp %h", q, exp));
      rdreq = 1;
      @(negedge rdclk);
      rdreq = 0;
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    #1 wrst_n = 0; rrst_n = 0;  // reset edge
    repeat (3) @(posedge rdclk);
    wrst_n = 1; rrst_n = 1;
    repeat (2) @(posedge rdclk);
    check(rdempty && rdusedw == 0 && !wrfull, "reset state");

    // latency of a single word into an empty FIFO
    push(16'hA5A5);
    lat = 0;
    while (rdempty && lat < 20) begin @(posedge rdclk); #1; lat++; end
    check(lat <= SYNC + 3, $sformatf("write-to-visible latency %0d rdclk", lat));
    check(q == 16'hA5A5 && rdusedw == 1, "show-ahead word and count of one");
    pop_check();
    repeat (SYNC + 3) @(posedge rdclk);
    check(rdempty && rdusedw == 0, "empty after single pop");

    // fill to full
    for (int i = 0; i < DEPTH; i++) push(16'(i * 3 + 1));
    #1;
    check(wrfull, "wrfull after DEPTH writes");
    push(16'hDEAD);          // dropped
    check(model.size() == DEPTH, "write while full dropped");
    repeat (SYNC + 3) @(posedge rdclk);
    #1;
    check(int'(rdusedw) == DEPTH, $sformatf("rdusedw=%0d at full", rdusedw));
    while (model.size() > 0) pop_check();
    repeat (SYNC + 3) @(posedge wrclk);
    repeat (SYNC + 3) @(posedge rdclk);
    check(rdempty && !wrfull, "empty and not full after drain");

    // random concurrent traffic
    fork
      begin
        for (int i = 0; i < 600; i++) begin
          @(negedge wrclk);
          wrreq = ($urandom_range(0, 3) != 0);
          datain = 16'($urandom);
          @(posedge wrclk);
          if (wrreq && !wrfull) model.push_back(datain);
        end
        @(negedge wrclk) wrreq = 0;
      end
      begin
        for (int i = 0; i < 900; i++) begin
          @(negedge rdclk);
          if (!rdempty && $urandom_range(0, 2) != 0) begin
            logic [DW-1:0] exp;
            exp = model.pop_front();
            check(q == exp, $sformatf("random data order: got %h exp %h", q, exp));
            rdreq = 1;
          end else rdreq = 0;
          check(int'(rdusedw) <= DEPTH, "count in range");
        end
        @(negedge rdclk) rdreq = 0;
      end
    join
    while (model.size() > 0) pop_check();
    check(model.size() == 0, "all random words delivered");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
