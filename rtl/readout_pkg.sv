// readout_pkg: types and constants shared by the FPGA readout logic.
//
// The CPU-to-FPGA data channel is a 16-bit static-memory (SRAM) bus, so a
// word is 16 bits and the transmission length, which the CPU counts in bytes,
// is compared against twice the FIFO word count. The command frame layout
// and opcode values below are this design's own choice; the source design
// only says that the transmission length "can be set to a default value or
// configured by the command".
package readout_pkg;

  localparam int unsigned DATA_W   = 16;   // SRAM bus width
  localparam int unsigned LEN_W    = 24;   // width of a transmission length in bytes
  localparam int unsigned CMD_ARG_W = 24;  // argument bytes of a command frame

  typedef logic [DATA_W-1:0] word_t;
  typedef logic [LEN_W-1:0]  len_t;

  // Read Ready / IRQ handshake states.
  typedef enum logic [1:0] {
    ST_IDLE     = 2'd0,  // Read Ready invalid, IRQ low
    ST_JUDGE    = 2'd1,  // Read Ready valid, waiting for FIFO count >= length
    ST_IRQ      = 2'd2   // IRQ valid, waiting for Read Ready to go invalid
  } hs_state_t;

  // Command opcodes (first byte of a 4-byte frame: opcode, arg[23:16],
  // arg[15:8], arg[7:0]).
  typedef enum logic [7:0] {
    OP_SET_LEN     = 8'h01,  // transmission length in bytes := arg
    OP_DEFAULT_LEN = 8'h02   // transmission length := default value
  } opcode_t;

  // A command frame handed to the user logic (every opcode not listed above).
  typedef struct packed {
    logic [7:0]           opcode;
    logic [CMD_ARG_W-1:0] arg;
  } user_cmd_t;

endpackage
