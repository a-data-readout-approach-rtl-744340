// reset_sync: asserts its reset output asynchronously with arst_n and
// releases it synchronously, two clk edges after arst_n rises, so that every
// flop of the clk domain leaves reset on the same edge. Verilator reports
// the two flops as SYNCASYNCNET because their output is itself used as an
// asynchronous reset downstream; that is the purpose of this circuit.
module reset_sync (
  input  logic clk,
  input  logic arst_n,
  output logic rst_n
);
  logic [1:0] r;
  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) r <= 2'b00;
    else         r <= {r[0], 1'b1};
  end
  assign rst_n = r[1];
endmodule
