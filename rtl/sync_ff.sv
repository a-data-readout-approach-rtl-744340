// sync_ff: multi-stage flip-flop synchronizer for a bus of independent bits
// (single bits or Gray-coded values) entering the clk domain. STAGES flops in
// series; the output lags the input by STAGES clock edges. rst_n clears the
// chain asynchronously to RESET_VAL.
module sync_ff #(
  parameter int unsigned     WIDTH     = 1,
  parameter int unsigned     STAGES    = 2,
  parameter logic [WIDTH-1:0] RESET_VAL = '0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  logic [WIDTH-1:0] chain [STAGES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < STAGES; i++) chain[i] <= RESET_VAL;
    end else begin
      chain[0] <= d;
      for (int i = 1; i < STAGES; i++) chain[i] <= chain[i-1];
    end
  end

  assign q = chain[STAGES-1];
endmodule
