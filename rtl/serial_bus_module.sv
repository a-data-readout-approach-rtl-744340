// serial_bus_module: FPGA end of the low-speed command channel.
//
// The CPU sends commands and configuration to the FPGA over one of its
// USARTs; the channel runs in one direction only, CPU to FPGA. This module
// receives the serial bytes (uart_rx, 8N1) and groups them into 4-byte
// command frames: opcode, then a 24-bit argument, most significant byte
// first. Frames addressed to the buffer module are executed here:
//
//   OP_SET_LEN     (0x01)  transmission length := argument, in bytes
//   OP_DEFAULT_LEN (0x02)  transmission length := DEFAULT_LEN
//
// A length of 0 or above MAX_LEN (the FIFO capacity in bytes; a longer
// transfer could never become ready) is refused: the length is unchanged and
// cmd_error pulses. Any other opcode is a command for the user logic and is
// passed on unchanged as a one-cycle user_cmd_valid pulse with user_cmd.
// If the line stays idle for more than TIMEOUT_CLKS clk cycles in the middle
// of a frame the partial frame is discarded, so a lost byte cannot shift
// every later frame. A serial framing error also discards the partial frame.
//
// Timing: trans_len changes on the clk edge after the last byte's stop bit
// has been sampled; it is meant to be read in the same clock domain (the
// CPU-supplied CLK in the top level).
//
// From the source design: a serial command channel from the CPU to the FPGA
// that sets the transmission length (default or configured by command) and
// carries the user logic's commands. The frame layout, the opcodes, the
// serial format, the timeout and the range check are this design's choices.
module serial_bus_module
  import readout_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 521,         // e.g. 60 MHz / 115200 baud
  parameter int unsigned DEFAULT_LEN  = 16384,       // bytes
  parameter int unsigned MAX_LEN      = 65536,       // bytes (2 x FIFO depth)
  parameter int unsigned TIMEOUT_CLKS = 20 * CLKS_PER_BIT
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      rxd,             // from CPU USART TXD, idle high
  output len_t      trans_len,       // bytes
  output logic      user_cmd_valid,
  output user_cmd_t user_cmd,
  output logic      cmd_error        // refused length or framing error
);
  logic       rx_valid, rx_ferr;
  logic [7:0] rx_data;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk(clk), .rst_n(rst_n), .rxd(rxd),
    .valid(rx_valid), .data(rx_data), .frame_err(rx_ferr));

  localparam int unsigned TW = $clog2(TIMEOUT_CLKS + 1);

  logic [1:0]  nbytes;        // bytes of the current frame received so far
  logic [23:0] frame;         // first three bytes
  logic [TW-1:0] idle_cnt;
  logic [31:0] full_frame;
  logic [23:0] arg;

  assign full_frame = {frame, rx_data};
  assign arg        = full_frame[23:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nbytes         <= '0;
      frame          <= '0;
      idle_cnt       <= '0;
      trans_len      <= len_t'(DEFAULT_LEN);
      user_cmd_valid <= 1'b0;
      user_cmd       <= '0;
      cmd_error      <= 1'b0;
    end else begin
      user_cmd_valid <= 1'b0;
      cmd_error      <= 1'b0;

      if (rx_ferr) begin
        nbytes    <= '0;
        cmd_error <= 1'b1;
      end else if (rx_valid) begin
        idle_cnt <= '0;
        if (nbytes != 2'd3) begin
          frame  <= {frame[15:0], rx_data};
          nbytes <= nbytes + 1'b1;
        end else begin
          nbytes <= '0;
          unique case (full_frame[31:24])
            OP_SET_LEN: begin
              if (arg != 0 && 32'(arg) <= 32'(MAX_LEN)) trans_len <= len_t'(arg);
              else                                       cmd_error <= 1'b1;
            end
            OP_DEFAULT_LEN: trans_len <= len_t'(DEFAULT_LEN);
            default: begin
              user_cmd_valid  <= 1'b1;
              user_cmd.opcode <= full_frame[31:24];
              user_cmd.arg    <= arg;
            end
          endcase
        end
      end else if (nbytes != 0) begin
        if (idle_cnt == TW'(TIMEOUT_CLKS)) begin
          nbytes   <= '0;
          idle_cnt <= '0;
        end else begin
          idle_cnt <= idle_cnt + 1'b1;
        end
      end
    end
  end
endmodule
