// tb_serial_bus_module: self-checking test of the command channel receiver.
//
// A USART model sends 8N1 bytes (LSB first, CLKS_PER_BIT clk per bit, 16
// here) and 4-byte command frames. Checks: the default transmission length
// after reset; set-length frames taking effect and out-of-range ones (0, more
// than the FIFO capacity) refused with a cmd_error pulse; the reset-to-default
// command; user commands forwarded once with opcode and argument intact;
// a partial frame discarded after the idle timeout; a byte with a bad stop
// bit flagged and the partial frame dropped.
module tb_serial_bus_module;
  import readout_pkg::*;
  localparam int CPB = 16;

  logic clk = 0, rst_n = 1, rxd = 1;
  len_t trans_len;
  logic user_cmd_valid, cmd_error;
  user_cmd_t user_cmd;

  int checks = 0, failures = 0;
  int n_user = 0, n_err = 0;
  user_cmd_t last_cmd;

  serial_bus_module #(.CLKS_PER_BIT(CPB), .DEFAULT_LEN(16384), .MAX_LEN(65536)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (rst_n && user_cmd_valid) begin n_user++; last_cmd = user_cmd; end
    if (rst_n && cmd_error) n_err++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  task automatic send_byte(input logic [7:0] b, input bit stop = 1'b1);
    @(negedge clk);
    rxd = 0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(negedge clk); end
    rxd = stop; repeat (CPB) @(negedge clk);
    rxd = 1; repeat (2) @(negedge clk);
  endtask

  task automatic send_frame(input logic [7:0] op, input logic [23:0] arg);
    send_byte(op); send_byte(arg[23:16]); send_byte(arg[15:8]); send_byte(arg[7:0]);
    repeat (4) @(negedge clk);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e0;
    #1 rst_n = 0;  // reset edge
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    check(trans_len == 16384, "default length after reset");

    send_frame(8'h01, 24'd256);
    check(trans_len == 256, $sformatf("set length 256, got %0d", trans_len));
    send_frame(8'h01, 24'd65536);
    check(trans_len == 65536, "set length 65536 (capacity)");

    e0 = n_err;
    send_frame(8'h01, 24'd0);
    check(trans_len == 65536 && n_err == e0 + 1, "length 0 refused");
    send_frame(8'h01, 24'd65538);
    check(trans_len == 65536 && n_err == e0 + 2, "length above capacity refused");

    send_frame(8'h01, 24'd1000);
    send_frame(8'h02, 24'h000000);
    check(trans_len == 16384, "back to default length");

    send_frame(8'h7E, 24'h123456);
    check(n_user == 1 && last_cmd.opcode == 8'h7E && last_cmd.arg == 24'h123456,
          "user command forwarded");
    send_frame(8'hC3, 24'hABCDEF);
    check(n_user == 2 && last_cmd.opcode == 8'hC3 && last_cmd.arg == 24'hABCDEF,
          "second user command forwarded");
    check(trans_len == 16384, "user commands leave the length alone");

    // partial frame, then silence longer than the timeout (20 bit times)
    send_byte(8'h01); send_byte(8'h00);
    repeat (25 * CPB) @(negedge clk);
    send_frame(8'h01, 24'd512);
    check(trans_len == 512, $sformatf("frame after timeout realigned, len %0d", trans_len));
    check(n_user == 2, "no stray user command after timeout");

    // framing error in the middle of a frame
    e0 = n_err;
    send_byte(8'h01); send_byte(8'h00, 1'b0);
    repeat (3) @(negedge clk);
    check(n_err == e0 + 1, "framing error flagged");
    send_frame(8'h01, 24'd2048);
    check(trans_len == 2048, $sformatf("frame after framing error, len %0d", trans_len));
    check(n_user == 2, "user command count unchanged");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
