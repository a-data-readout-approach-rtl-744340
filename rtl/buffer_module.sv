// buffer_module: the FPGA's data path to the CPU.
//
// It caches data words from the user logic and hands them to the CPU, which
// reads them over its static-memory (SRAM) bus as if the FPGA were a 16-bit
// asynchronous SRAM, in blocks of one transmission length. Three parts:
//
//   async_fifo         caches the words; written on the user clock, read on
//                      the clock the CPU supplies (CLK).
//   fifo_controller    pops the FIFO at the end of each CPU read strobe and
//                      enables the data-bus drivers while the CPU reads; the
//                      FIFO head word itself goes straight to the bus. The
//                      address bus is not used, so every read returns the
//                      next word.
//   irq_state_machine  Read Ready / IRQ handshake: IRQ goes valid once Read
//                      Ready is valid and the FIFO count covers the
//                      transmission length, and invalid when Read Ready
//                      drops.
//
// A transfer: the CPU makes Read Ready valid; when IRQ rises it makes Read
// Ready invalid (IRQ follows) and then issues trans_len/2 word reads.
// trans_len comes from the serial bus module (default or set by command).
//
// The three-part structure, the signals and the handshake follow the source
// design; the FIFO depth, synchronizer depths and the exact strobe timing are
// this design's choices (see the sub-modules).
module buffer_module
  import readout_pkg::len_t, readout_pkg::hs_state_t;
#(
  parameter int unsigned DATA_W       = 16,
  parameter int unsigned DEPTH        = 32768,  // FIFO words
  parameter int unsigned FIFO_SYNC    = 2,      // FIFO pointer synchronizer
  parameter int unsigned BUS_SYNC     = 0,      // SRAM strobe sampling stages
  parameter int unsigned READY_SYNC   = 2,      // Read Ready synchronizer
  localparam int unsigned CNT_W = $clog2(DEPTH) + 1
) (
  // user logic side: general FIFO interface
  input  logic              wrclk,
  input  logic              wrst_n,
  input  logic              wrreq,
  input  logic [DATA_W-1:0] datain,
  output logic              wrfull,
  // CPU side
  input  logic              clk,          // CLK from CPU
  input  logic              rst_n,
  input  logic              ncs,          // SRAM chip select, active low
  input  logic              noe,          // SRAM output enable, active low
  output logic [DATA_W-1:0] data_out,     // SRAM data bus (drive value)
  output logic              data_oe,      // SRAM data bus driver enable
  input  logic              read_ready,
  output logic              irq,
  // configuration and status
  input  len_t              trans_len,    // bytes
  output logic [CNT_W-1:0]  fifo_count,   // words
  output hs_state_t         hs_state,
  output logic              fifo_empty,
  output logic              data_ready    // count covers the length
);
  logic [DATA_W-1:0] fifo_q;
  logic              fifo_rdreq;

  async_fifo #(.DATA_W(DATA_W), .DEPTH(DEPTH), .SYNC_STAGES(FIFO_SYNC)) u_fifo (
    .wrclk(wrclk), .wrst_n(wrst_n), .wrreq(wrreq), .datain(datain), .wrfull(wrfull),
    .rdclk(clk), .rrst_n(rst_n), .rdreq(fifo_rdreq), .q(fifo_q),
    .rdempty(fifo_empty), .rdusedw(fifo_count));

  fifo_controller #(.SYNC_STAGES(BUS_SYNC)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .ncs(ncs), .noe(noe),
    .data_oe(data_oe), .fifo_rdreq(fifo_rdreq));

  // Data Bus: the FIFO head word goes straight to the SRAM data pins.
  assign data_out = fifo_q;

  irq_state_machine #(.CNT_W(CNT_W), .SYNC_STAGES(READY_SYNC)) u_fsm (
    .clk(clk), .rst_n(rst_n), .read_ready(read_ready), .fifo_count(fifo_count),
    .trans_len(trans_len), .irq(irq), .state(hs_state), .data_ready(data_ready));
endmodule
