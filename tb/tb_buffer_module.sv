// tb_buffer_module: self-checking test of the buffer module (FIFO, FIFO
// controller and Read Ready / IRQ state machine together).
//
// A producer on its own clock writes a counting sequence through the FIFO
// interface, holding off while wrfull is high. A CPU model on the bus clock
// runs the driver's transfer loop: make Read Ready valid, wait for IRQ, make
// Read Ready invalid, wait for IRQ to drop, then read trans_len/2 words with
// back-to-back SRAM read cycles (noe low one clk, high one clk). Checks:
// every word arrives in order; IRQ is never seen while fewer than trans_len
// bytes are counted; a burst of N words takes exactly 2N bus clocks; the
// FIFO fills (wrfull) when the CPU pauses; several transmission lengths work.
module tb_buffer_module;
  import readout_pkg::*;
  localparam int DEPTH = 64;

  logic wrclk = 0, clk = 0, wrst_n = 1, rst_n = 1;
  logic wrreq = 0;
  logic [15:0] datain = '0, data_out;
  logic wrfull, data_oe, irq, fifo_empty, data_ready;
  logic ncs = 1, noe = 1, read_ready = 0;
  len_t trans_len = len_t'(32);
  logic [$clog2(DEPTH):0] fifo_count;
  hs_state_t hs_state;

  int checks = 0, failures = 0;
  int n_full = 0, n_wait = 0;
  logic [15:0] expect_word = '0;
  bit produce = 1;

  buffer_module #(.DEPTH(DEPTH)) dut (.*);

  always #4 wrclk = ~wrclk;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  // producer: counting sequence, respects wrfull
  // wrfull only changes at rising wrclk edges, so the value seen at the
  // falling edge tells whether the write set up now is taken at the next one.
  logic [15:0] next_word = '0;
  always @(negedge wrclk) begin
    wrreq  = wrst_n && produce;
    datain = next_word;
    if (wrreq && !wrfull) next_word++;
    if (wrreq && wrfull) n_full++;
  end

  // IRQ must never rise while the counted data is short
  always @(posedge clk) if (rst_n && irq && !$past(irq))
    check(int'(fifo_count) * 2 >= int'(trans_len) || $past(data_ready),
          "IRQ raised with enough data");

  task automatic transfer(input int len_bytes, input bit check_rate);
    int t0, words;
    trans_len = len_t'(len_bytes);
    words = (len_bytes + 1) / 2;
    @(negedge clk) read_ready = 1;
    @(posedge clk); #1;
    if (!data_ready) n_wait++;
    while (!irq) @(negedge clk);
    read_ready = 0;
    while (irq) @(negedge clk);
    ncs = 0;
    t0 = int'($time / 10);
    for (int i = 0; i < words; i++) begin
      noe = 0;
      @(negedge clk);
      check(data_oe && data_out == expect_word,
            $sformatf("word %0d: got %h exp %h", i, data_out, expect_word));
      expect_word++;
      noe = 1;
      @(negedge clk);
    end
    if (check_rate)
      check(int'($time / 10) - t0 == 2 * words,
            $sformatf("burst of %0d words took %0d clk", words, int'($time / 10) - t0));
    ncs = 1;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 wrst_n = 0; rst_n = 0;
    repeat (3) @(posedge clk);
    wrst_n = 1; rst_n = 1;
    // CPU idle while producer fills the FIFO
    repeat (2 * DEPTH) @(posedge clk);
    check(wrfull && n_full > 0, "FIFO full while CPU is idle");
    check(!irq, "no IRQ without Read Ready");
    for (int r = 0; r < 6; r++) transfer(32, 1);
    for (int r = 0; r < 4; r++) transfer(128, 1);    // the whole FIFO
    for (int r = 0; r < 4; r++) transfer(6, 1);
    transfer(13, 0);                                   // odd length: 7 words
    // starve the producer: the state machine must wait for data
    produce = 0;
    repeat (20) @(posedge clk);
    fork
      transfer(100, 1);
      begin repeat (60) @(posedge clk); produce = 1; end
    join
    check(n_wait > 0, "Read Ready arrived before the data at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
