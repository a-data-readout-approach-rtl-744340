// tb_irq_state_machine: self-checking test of the Read Ready / IRQ handshake.
//
// Drives Read Ready, the FIFO word count and the transmission length and
// checks IRQ against the rule: IRQ rises only after Read Ready is valid and
// count*2 >= length, falls after Read Ready goes invalid, and never rises
// while the count is short. Cycle counts: with two synchronizer stages IRQ
// rises on the 4th clk edge after Read Ready when data is already there
// (2 synchronizer, 1 judge, 1 IRQ), on the 1st edge after the count reaches
// the length when Read Ready is already seen, and falls on the 3rd edge
// after Read Ready is withdrawn. Also covers a request withdrawn before the
// data arrives, an odd byte length, and data arriving late.
module tb_irq_state_machine;
  import readout_pkg::*;

  logic clk = 0, rst_n = 1;
  logic read_ready = 0;
  logic [15:0] fifo_count = '0;
  len_t trans_len = len_t'(512);
  logic irq, data_ready;
  hs_state_t state;

  int checks = 0, failures = 0;

  irq_state_machine #(.CNT_W(16), .SYNC_STAGES(2)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  // cycles from now until irq == level (max 50)
  task automatic wait_irq(input bit level, output int n);
    n = 0;
    while (irq !== level && n < 50) begin @(posedge clk); #1; n++; end
  endtask

  initial begin
    #50000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    #1 rst_n = 0;  // reset edge
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check(!irq && state == ST_IDLE, "idle after reset");

    // 1. data already there: 256 words = 512 bytes
    fifo_count = 16'd256;
    repeat (5) @(posedge clk); #1;
    check(!irq, "no IRQ without Read Ready");
    @(negedge clk) read_ready = 1;
    wait_irq(1, n);
    check(n == 4, $sformatf("IRQ rise latency %0d clk (exp 4)", n));
    repeat (10) @(posedge clk); #1;
    check(irq, "IRQ held while Read Ready valid");
    @(negedge clk) read_ready = 0;
    wait_irq(0, n);
    check(n == 3, $sformatf("IRQ fall latency %0d clk (exp 3)", n));
    check(state == ST_IDLE, "back to idle");

    // 2. data arrives late
    fifo_count = 16'd100;
    @(negedge clk) read_ready = 1;
    repeat (20) @(posedge clk); #1;
    check(!irq && state == ST_JUDGE, "waits while count*2 < length");
    fifo_count = 16'd255;   // 510 bytes: still short
    repeat (5) @(posedge clk); #1;
    check(!irq, "510 bytes < 512");
    @(negedge clk) fifo_count = 16'd256;
    wait_irq(1, n);
    check(n == 1, $sformatf("IRQ one clk after count reaches length, got %0d", n));
    @(negedge clk) read_ready = 0;
    wait_irq(0, n);
    check(!irq, "IRQ dropped");

    // 3. request withdrawn before data is ready
    fifo_count = 16'd10;
    @(negedge clk) read_ready = 1;
    repeat (10) @(posedge clk);
    @(negedge clk) read_ready = 0;
    repeat (5) @(posedge clk); #1;
    check(state == ST_IDLE && !irq, "withdrawn request returns to idle");
    fifo_count = 16'd300;
    repeat (5) @(posedge clk); #1;
    check(!irq, "no IRQ after withdrawal even with data");

    // 4. odd length rounds up to whole words
    trans_len = len_t'(11);
    fifo_count = 16'd5;
    @(negedge clk) read_ready = 1;
    repeat (8) @(posedge clk); #1;
    check(!irq, "5 words < 11 bytes");
    @(negedge clk) fifo_count = 16'd6;
    wait_irq(1, n);
    check(irq, "6 words >= 11 bytes");
    @(negedge clk) read_ready = 0;
    wait_irq(0, n);

    // 5. large length near the top of the count range
    trans_len = len_t'(65536);
    fifo_count = 16'd32767;
    @(negedge clk) read_ready = 1;
    repeat (8) @(posedge clk); #1;
    check(!irq, "32767 words < 65536 bytes");
    @(negedge clk) fifo_count = 16'd32768;
    wait_irq(1, n);
    check(irq, "32768 words = 65536 bytes");
    @(negedge clk) read_ready = 0;
    wait_irq(0, n);
    check(!irq, "final drop");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
