// tb_length_sweep: transmission-length sweep of the FPGA readout logic, as in
// the route-1 measurement (FPGA to a CPU register over the static-memory
// bus) with data always waiting in the buffer.
//
// The top level runs at its default size. The user-logic model keeps the
// FIFO topped up. For each transmission length from 64 to 65536 bytes
// (powers of two) the CPU model sets the length by serial command, waits
// until the FIFO holds a whole transfer, then times one transfer in bus
// clocks: the handshake (Read Ready valid to IRQ invalid, from the CPU's
// side) and the burst of back-to-back reads. Checks: every word in order;
// the burst takes exactly two clocks per word; the handshake cost is the
// same at every length (the FPGA adds no length-dependent delay). The table
// printed gives bits per bus clock; multiply by the bus frequency for bit/s.
module tb_length_sweep;
  import readout_pkg::*;
  localparam int CPB = 521;
  localparam time TCPU = 16ns;
  localparam time TUSR = 25ns;

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
  logic [15:0] expect_word = '0;
  logic [15:0] next_word = '0;
  int hs_first = -1;

  readout_fpga_top dut (.*);

  always #(TCPU / 2) cpu_clk = ~cpu_clk;
  always #(TUSR / 2) wrclk = ~wrclk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  always @(negedge wrclk) begin
    wrreq  = wrrst_n;
    datain = next_word;
    if (wrreq && !wrfull) next_word++;
  end

  task automatic send_byte(input logic [7:0] b);
    @(negedge cpu_clk);
    rxd = 0; repeat (CPB) @(negedge cpu_clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(negedge cpu_clk); end
    rxd = 1; repeat (CPB + 2) @(negedge cpu_clk);
  endtask

  initial begin
    #40ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len, words, hs, burst, bad;
    #1 rst_n = 0;
    #100ns rst_n = 1;
    repeat (5) @(posedge cpu_clk);
    $display("  length(B)  handshake(clk)  burst(clk)  bits/clk");
    for (int k = 6; k <= 16; k++) begin
      len = 1 << k;
      words = len / 2;
      send_byte(OP_SET_LEN); send_byte(8'(len >> 16)); send_byte(8'(len >> 8)); send_byte(8'(len));
      repeat (4) @(negedge cpu_clk);
      check(int'(trans_len) == len, $sformatf("length %0d set", len));
      while (int'(fifo_count) < words) @(negedge cpu_clk);
      // handshake
      hs = 0;
      read_ready = 1;
      while (!irq) begin @(negedge cpu_clk); hs++; end
      read_ready = 0;
      while (irq) begin @(negedge cpu_clk); hs++; end
      // burst
      ncs = 0; burst = 0; bad = 0;
      for (int i = 0; i < words; i++) begin
        noe = 0; @(negedge cpu_clk); burst++;
        if (!(sram_data_oe && sram_data_out == expect_word)) bad++;
        expect_word++;
        noe = 1; @(negedge cpu_clk); burst++;
      end
      ncs = 1;
      check(bad == 0, $sformatf("length %0d: %0d words wrong", len, bad));
      check(burst == 2 * words, $sformatf("length %0d: burst %0d clk", len, burst));
      if (hs_first < 0) hs_first = hs;
      check(hs == hs_first, $sformatf("length %0d: handshake %0d clk, first was %0d", len, hs, hs_first));
      $display("  %9d  %14d  %10d  %8.3f", len, hs, burst, real'(len * 8) / real'(hs + burst));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
