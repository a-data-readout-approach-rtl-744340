// irq_state_machine: the Read Ready / IRQ handshake of the buffer module.
//
// The CPU driver starts a transfer by making Read Ready valid and then
// sleeps. This state machine, in the CPU-clock domain, then judges whether a
// whole transfer is waiting in the FIFO by comparing the FIFO count with the
// transmission length; once it is, it makes IRQ valid. The CPU's interrupt
// handler answers by making Read Ready invalid, upon which IRQ is made
// invalid again and the CPU reads the data over the SRAM bus.
//
//   ST_IDLE  --ready--------------------> ST_JUDGE
//   ST_JUDGE --ready & count*2 >= len----> ST_IRQ   (IRQ = 1 in ST_IRQ)
//   ST_JUDGE --!ready--------------------> ST_IDLE  (request withdrawn)
//   ST_IRQ   --!ready--------------------> ST_IDLE
//
// The FIFO count is in 16-bit words and the transmission length in bytes,
// so the comparison is count*2 >= trans_len. A length of zero counts as
// always ready.
//
// Interface/timing: read_ready is a CPU GPIO line, asynchronous to clk, and
// passes through SYNC_STAGES flops. irq is a registered output. It rises
// SYNC_STAGES+2 clk edges after Read Ready goes valid if the data is already
// there (synchronizer, judge, IRQ), or on the first edge after the count
// reaches the length while in ST_JUDGE; it falls SYNC_STAGES+1 edges after
// Read Ready goes invalid. Both lines are active
// high (the polarity is not fixed by the source design). The handshake and
// the comparison follow the source design; the state encoding, the
// withdrawal arc from ST_JUDGE and the synchronizer are this design's own.
//
// Lint note: the reset is used both as an asynchronous flop reset and in the
// assertions' `disable iff`, which Verilator reports as SYNCASYNCNET; this is
// intended and harmless.
module irq_state_machine
  import readout_pkg::*;
#(
  parameter int unsigned CNT_W       = 16,   // width of the FIFO word count
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic             clk,          // CLK supplied by the CPU
  input  logic             rst_n,
  input  logic             read_ready,   // from CPU GPIO
  input  logic [CNT_W-1:0] fifo_count,   // words in FIFO (read side)
  input  len_t             trans_len,    // transmission length, bytes
  output logic             irq,          // to CPU external interrupt
  output hs_state_t        state,
  output logic             data_ready    // count has reached the length
);
  logic      ready_s;
  hs_state_t state_n;

  sync_ff #(.WIDTH(1), .STAGES(SYNC_STAGES)) u_sync (
    .clk(clk), .rst_n(rst_n), .d(read_ready), .q(ready_s));

  // count*2 >= trans_len, evaluated wide enough for either operand
  localparam int unsigned CW = (CNT_W + 1 > LEN_W) ? CNT_W + 1 : LEN_W;
  assign data_ready = (CW'({fifo_count, 1'b0}) >= CW'(trans_len));

  always_comb begin
    state_n = state;
    unique case (state)
      ST_IDLE:  if (ready_s)                  state_n = ST_JUDGE;
      ST_JUDGE: if (!ready_s)                 state_n = ST_IDLE;
                else if (data_ready)          state_n = ST_IRQ;
      ST_IRQ:   if (!ready_s)                 state_n = ST_IDLE;
      default:                                state_n = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= ST_IDLE;
    else        state <= state_n;
  end

  assign irq = (state == ST_IRQ);

  // IRQ only while the CPU is asking for data (one cycle of lag allowed).
  a_irq_needs_ready: assert property (@(posedge clk) disable iff (!rst_n)
    irq && !ready_s |=> !irq);
endmodule
