// readout_fpga_top: FPGA logic of an Ethernet readout module.
//
// The readout module pairs a standalone CPU, which runs the network stack and
// ships event data to the DAQ over Ethernet, with this FPGA, which takes the
// front-end data in. Two simplex channels join them:
//
//   high-speed data channel, FPGA -> CPU: the CPU's static-memory (SRAM)
//     bus, its clock output (CLK), one GPIO (Read Ready) and one external
//     interrupt (IRQ), served by buffer_module;
//   low-speed command channel, CPU -> FPGA: a USART line, served by
//     serial_bus_module, which sets the buffer module's transmission length
//     and forwards all other commands to the user logic.
//
// The user logic (experiment specific, not part of this RTL) writes data
// words through the plain FIFO interface (wrclk, wrreq, datain, wrfull)
// and receives commands on user_cmd_valid/user_cmd in the cpu_clk domain.
// The SRAM data bus is given as a drive value plus an output enable for the
// pad's tri-state buffer, since this FPGA never reads that bus.
//
// Resets: one asynchronous active-low rst_n, released synchronously into each
// clock domain; wrrst_n is the wrclk domain's copy for the user logic.
//
// What follows the source design: the split into serial bus module and buffer
// module (FIFO, FIFO controller, state machine), the signals between CPU and
// FPGA, the 16-bit bus and the Read Ready / IRQ handshake. The FIFO depth,
// serial format and command frames, reset scheme and strobe timing are this
// design's own choices.
module readout_fpga_top
  import readout_pkg::*;
#(
  parameter int unsigned DEPTH        = 32768,   // FIFO words
  parameter int unsigned CLKS_PER_BIT = 521,     // cpu_clk cycles per serial bit
  parameter int unsigned DEFAULT_LEN  = 16384,   // transmission length, bytes
  localparam int unsigned CNT_W = $clog2(DEPTH) + 1
) (
  input  logic             rst_n,
  // CPU side
  input  logic             cpu_clk,        // CLK: programmable clock output of the CPU
  input  logic             ncs,            // SRAM chip select, active low
  input  logic             noe,            // SRAM output enable, active low
  output logic [DATA_W-1:0] sram_data_out,
  output logic             sram_data_oe,
  input  logic             read_ready,     // CPU GPIO
  output logic             irq,            // to CPU external interrupt
  input  logic             rxd,            // command channel from CPU USART
  // user logic side
  input  logic             wrclk,
  output logic             wrrst_n,
  input  logic             wrreq,
  input  logic [DATA_W-1:0] datain,
  output logic             wrfull,
  output logic             user_cmd_valid,
  output user_cmd_t        user_cmd,
  // status
  output len_t             trans_len,
  output logic             cmd_error,
  output logic [CNT_W-1:0] fifo_count,
  output hs_state_t        hs_state,
  output logic             fifo_empty,
  output logic             data_ready
);
  logic cpu_rst_n;

  reset_sync u_rst_cpu  (.clk(cpu_clk),  .arst_n(rst_n), .rst_n(cpu_rst_n));
  reset_sync u_rst_user (.clk(wrclk), .arst_n(rst_n), .rst_n(wrrst_n));

  serial_bus_module #(
    .CLKS_PER_BIT(CLKS_PER_BIT), .DEFAULT_LEN(DEFAULT_LEN), .MAX_LEN(2 * DEPTH)
  ) u_serial (
    .clk(cpu_clk), .rst_n(cpu_rst_n), .rxd(rxd), .trans_len(trans_len),
    .user_cmd_valid(user_cmd_valid), .user_cmd(user_cmd), .cmd_error(cmd_error));

  buffer_module #(.DATA_W(DATA_W), .DEPTH(DEPTH)) u_buffer (
    .wrclk(wrclk), .wrst_n(wrrst_n), .wrreq(wrreq), .datain(datain), .wrfull(wrfull),
    .clk(cpu_clk), .rst_n(cpu_rst_n), .ncs(ncs), .noe(noe),
    .data_out(sram_data_out), .data_oe(sram_data_oe),
    .read_ready(read_ready), .irq(irq),
    .trans_len(trans_len), .fifo_count(fifo_count), .hs_state(hs_state),
    .fifo_empty(fifo_empty), .data_ready(data_ready));
endmodule
