// tb_fifo_controller: self-checking test of the SRAM-strobe to FIFO-pop logic.
//
// A CPU model issues SRAM read cycles on a clock it shares with the DUT
// (strobes change at the falling clock edge): fastest cycles (noe low one
// clk, high one clk), slow cycles with a long low time, reads with chip
// select held low across several words, and strobes with chip select high
// (another device on the bus). Checks: exactly one rdreq per read strobe of
// this device and none otherwise; rdreq is seen on the first rising edge
// after the strobe ends; the data bus is driven exactly while ncs and noe are
// both low.
module tb_fifo_controller;
  logic clk = 0, rst_n = 1;
  logic ncs = 1, noe = 1;
  logic data_oe, fifo_rdreq;

  int checks = 0, failures = 0;
  int pops = 0, strobes = 0;
  logic [15:0] head = 16'h1000;   // FIFO model: head word, advances on pop

  fifo_controller dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  always @(posedge clk) if (rst_n && fifo_rdreq) begin pops++; head <= head + 1'b1; end

  // bus driver rule, checked continuously at both clock edges
  always @(clk) if (rst_n) begin
    check(data_oe == (!ncs && !noe), "data_oe follows ncs/noe");
  end

  // one read: noe low for `low` clk, then high; checks data and pop edge
  task automatic read_word(input int low, input int high, input bit mine);
    logic [15:0] seen;
    @(negedge clk);
    if (mine) ncs = 0;
    noe = 0;
    repeat (low) @(negedge clk);
    seen = head;
    noe = 1;
    if (mine) begin
      strobes++;
      @(posedge clk); #1;
      // the pop is taken on this edge: head has advanced by one
      check(head == seen + 1'b1, $sformatf("pop on first edge after strobe: head %h seen %h", head, seen));
      high = high - 1;
    end
    if (high > 0) repeat (high) @(negedge clk);
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p0;
    #1 rst_n = 0;  // reset edge
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // fastest cycles: 1 clk low, 1 clk high, chip select held low
    for (int i = 0; i < 20; i++) read_word(1, 1, 1);
    @(negedge clk) ncs = 1;
    repeat (3) @(negedge clk);
    check(pops == strobes, $sformatf("fast reads: %0d pops for %0d strobes", pops, strobes));

    // slow cycles with chip select per word
    for (int i = 0; i < 10; i++) begin
      read_word($urandom_range(1, 5), $urandom_range(1, 4), 1);
      @(negedge clk) ncs = 1;
    end
    repeat (3) @(negedge clk);
    check(pops == strobes, $sformatf("slow reads: %0d pops for %0d strobes", pops, strobes));

    // strobes for another device: no pops
    p0 = pops;
    ncs = 1;
    for (int i = 0; i < 5; i++) read_word(2, 2, 0);
    repeat (3) @(negedge clk);
    check(pops == p0, "no pop when chip select is high");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
