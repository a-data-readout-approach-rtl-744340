// fifo_controller: turns the CPU's SRAM-bus read strobes into FIFO read
// requests, without looking at the address bus.
//
// The CPU's static memory controller reads the buffer module as if it were a
// 16-bit asynchronous SRAM: it lowers chip select (ncs) and output enable
// (noe), latches the data bus when noe rises, and repeats for every word.
// Because the FIFO is show-ahead, the word on the bus is already the next one
// to deliver; this controller only has to pop it once the CPU has latched it.
// It samples ncs/noe on the CPU-supplied clock through SYNC_STAGES flops and
// issues a one-cycle rdreq on the first sample that no longer shows a read
// after one that did (a read is ncs and noe both low). SYNC_STAGES = 0
// samples the pads directly at the FIFO's pointer flops. The data-bus drivers are
// enabled (data_oe) directly from the pad strobes, with no clock in the path,
// for the whole time ncs and noe are low. The data itself goes from the FIFO
// output straight to the bus, not through this controller.
//
// Timing: with SYNC_STAGES = 0 (default, the strobes come from the same CPU
// clock that drives clk) a read strobe low for >= 1 clk followed by a high
// time of >= 1 clk is enough: the pop happens on the edge that samples noe
// high and the next word is on the bus one clock-to-output delay later.
// Larger SYNC_STAGES let the strobes be truly asynchronous, at the cost of
// a longer required high time (SYNC_STAGES+1 clk). One word per two clk is
// the best case: 16 bits x CLK/2, e.g. 480 Mbit/s at a 60 MHz bus clock.
//
// From the source design: rdreq is derived from the control-bus timing alone
// and the address bus is ignored. The pop-on-trailing-edge rule, the strobe
// names and the sampling depth are this design's choices. CPU writes on the
// bus (nwe) are not part of the simplex data channel and are not decoded.
module fifo_controller #(
  parameter int unsigned SYNC_STAGES = 0
) (
  input  logic              clk,        // CLK supplied by the CPU
  input  logic              rst_n,
  // SRAM control bus from the CPU (active low)
  input  logic              ncs,
  input  logic              noe,
  // SRAM data bus driver enable (tri-state control at the pads)
  output logic              data_oe,
  // FIFO read request
  output logic              fifo_rdreq
);
  logic rd_raw;    // read strobe active at the pads
  logic rd_cur;    // read strobe as seen in the clk domain
  logic rd_prev;   // rd_cur one clk earlier

  assign rd_raw = !ncs && !noe;

  if (SYNC_STAGES == 0) begin : g_direct
    assign rd_cur = rd_raw;
  end else begin : g_sync
    sync_ff #(.WIDTH(1), .STAGES(SYNC_STAGES)) u_sync (
      .clk(clk), .rst_n(rst_n), .d(rd_raw), .q(rd_cur));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_prev <= 1'b0;
    else        rd_prev <= rd_cur;
  end

  assign fifo_rdreq = rd_prev && !rd_cur;  // strobe ended: CPU has latched the word
  assign data_oe    = !ncs && !noe;
endmodule
