// tb_readout_fpga_top: end-to-end test of the FPGA readout logic at its
// default size (32768-word FIFO, 16384-byte default transmission length,
// 521 bus clocks per serial bit).
//
// Around the top level sit a user-logic model, which writes a counting
// sequence of 16-bit words on a 40 MHz clock and honours wrfull, and a CPU
// model on a 62.5 MHz bus clock, which sends 4-byte commands over the serial
// line and runs the driver's transfer loop (Read Ready valid, wait for IRQ,
// Read Ready invalid, wait for IRQ low, then read trans_len/2 words with
// back-to-back static-memory read cycles). Every word read is compared with
// the counting sequence. The test walks through: a transfer at the default
// length; the FIFO filling up (wrfull back-pressure); a length set by
// command; a user command passed to the user logic; a refused command; a
// Read Ready that arrives before the data (the state machine waits); a
// 65536-byte transfer of the whole FIFO; a request withdrawn before the data
// is there; a return to the default length by command. Each mechanism is
// counted, and one that never happened counts as a failure.
module tb_readout_fpga_top;
  import readout_pkg::*;
  localparam int CPB = 521;          // must match the top's default
  localparam time TCPU = 16ns;       // bus clock period
  localparam time TUSR = 25ns;       // user clock period

  logic rst_n = 1, cpu_clk = 0, wrclk = 0;
  logic ncs = 1, noe = 1, read_ready = 0, rxd = 1;
  logic [15:0] sram_data_out, datain = '0;
  logic sram_data_oe, irq, wrrst_n, wrreq = 0, wrfull;
  logic user_cmd_valid, cmd_error, fifo_empty, data_ready;
  user_cmd_t user_cmd;
  len_t trans_len;
  logic [15:0] fifo_count;
  hs_state_t hs_state;

  int checks = 0, failures = 0;
  int n_transfer = 0, n_full = 0, n_setlen = 0, n_default = 0, n_user = 0;
  int n_refused = 0, n_wait = 0, n_withdraw = 0, n_bigxfer = 0;
  logic [15:0] expect_word = '0;
  bit produce = 1;
  user_cmd_t last_cmd;

  readout_fpga_top dut (.*);

  always #(TCPU / 2) cpu_clk = ~cpu_clk;
  always #(TUSR / 2) wrclk = ~wrclk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  // user logic model
  // wrfull only changes at rising wrclk edges, so the value seen at the
  // falling edge tells whether the write set up now is taken at the next one.
  logic [15:0] next_word = '0;
  always @(negedge wrclk) begin
    wrreq  = wrrst_n && produce;
    datain = next_word;
    if (wrreq && !wrfull) next_word++;
    if (wrreq && wrfull) n_full++;
  end
  always @(posedge cpu_clk) begin
    if (user_cmd_valid) begin n_user++; last_cmd = user_cmd; end
    if (cmd_error) n_refused++;
  end

  // CPU USART model, 8N1
  task automatic send_byte(input logic [7:0] b);
    @(negedge cpu_clk);
    rxd = 0; repeat (CPB) @(negedge cpu_clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(negedge cpu_clk); end
    rxd = 1; repeat (CPB + 2) @(negedge cpu_clk);
  endtask
  task automatic send_cmd(input logic [7:0] op, input logic [23:0] arg);
    send_byte(op); send_byte(arg[23:16]); send_byte(arg[15:8]); send_byte(arg[7:0]);
    repeat (4) @(negedge cpu_clk);
  endtask

  // CPU driver model: one read() plus the user-space copy of the block
  task automatic transfer(input bit check_rate);
    int words, c0;
    words = (int'(trans_len) + 1) / 2;
    @(negedge cpu_clk) read_ready = 1;
    repeat (4) @(negedge cpu_clk);
    if (!irq && !data_ready) n_wait++;
    while (!irq) @(negedge cpu_clk);
    read_ready = 0;
    while (irq) @(negedge cpu_clk);
    ncs = 0;
    c0 = 0;
    for (int i = 0; i < words; i++) begin
      noe = 0;
      @(negedge cpu_clk);
      check(sram_data_oe && sram_data_out == expect_word,
            $sformatf("word %0d of %0d: got %h exp %h", i, words, sram_data_out, expect_word));
      expect_word++;
      noe = 1;
      @(negedge cpu_clk);
      c0 += 2;
    end
    ncs = 1;
    if (check_rate) check(c0 == 2 * words, "two bus clocks per word");
    n_transfer++;
    if (words == 32768) n_bigxfer++;
  endtask

  initial begin
    #20ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    #100ns rst_n = 1;
    repeat (5) @(posedge cpu_clk);
    check(trans_len == 16384, "default transmission length");

    // 1. transfer at the default length
    transfer(1);

    // 2. CPU idle: FIFO fills, user logic sees wrfull
    while (!wrfull) @(posedge wrclk);
    repeat (20) @(posedge wrclk);
    check(n_full > 0 && int'(fifo_count) == 32768, $sformatf("FIFO full, count %0d", fifo_count));

    // 3. length set by command, three short transfers
    send_cmd(OP_SET_LEN, 24'd512);
    check(trans_len == 512, "length set to 512 by command");
    if (trans_len == 512) n_setlen++;
    repeat (3) transfer(1);

    // 4. user command forwarded
    send_cmd(8'h55, 24'h000ABC);
    check(n_user == 1 && last_cmd.opcode == 8'h55 && last_cmd.arg == 24'h000ABC,
          "user command forwarded");

    // 5. refused command
    send_cmd(OP_SET_LEN, 24'd70000);
    check(n_refused == 1 && trans_len == 512, "length beyond capacity refused");

    // 6. Read Ready before the data: stop the user logic, ask for 65536 bytes
    produce = 0;
    send_cmd(OP_SET_LEN, 24'd65536);
    check(trans_len == 65536, "length set to 65536 by command");
    if (trans_len == 65536) n_setlen++;
    fork
      transfer(1);
      begin repeat (200) @(posedge cpu_clk); produce = 1; end
    join

    // 7. withdrawn request: user logic stopped, FIFO short of 65536 bytes
    produce = 0;
    repeat (10) @(posedge wrclk);
    @(negedge cpu_clk) read_ready = 1;
    repeat (100) @(negedge cpu_clk);
    check(!irq && hs_state == ST_JUDGE, "waiting for data");
    read_ready = 0;
    repeat (5) @(negedge cpu_clk);
    check(!irq && hs_state == ST_IDLE, "request withdrawn");
    if (hs_state == ST_IDLE) n_withdraw++;

    // 8. back to the default length, final transfer
    send_cmd(OP_DEFAULT_LEN, 24'd0);
    check(trans_len == 16384, "default length restored by command");
    if (trans_len == 16384) n_default++;
    produce = 1;
    transfer(1);

    $display("mechanisms: transfers=%0d fifo_full=%0d set_len=%0d default_len=%0d user_cmd=%0d refused=%0d data_wait=%0d withdraw=%0d full_fifo_transfer=%0d",
             n_transfer, n_full, n_setlen, n_default, n_user, n_refused, n_wait, n_withdraw, n_bigxfer);
    check(n_transfer > 0, "transfer happened");
    check(n_full > 0, "wrfull back-pressure happened");
    check(n_setlen > 0, "length set by command happened");
    check(n_default > 0, "default length command happened");
    check(n_user > 0, "user command happened");
    check(n_refused > 0, "refused command happened");
    check(n_wait > 0, "state machine waited for data");
    check(n_withdraw > 0, "withdrawn request happened");
    check(n_bigxfer > 0, "whole-FIFO transfer happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
