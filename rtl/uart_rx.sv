// uart_rx: 8N1 asynchronous serial receiver for the command channel.
//
// rxd passes through a two-flop synchronizer. A falling edge starts a frame;
// the line is re-checked half a bit later (a start bit that is gone by then
// is a glitch and is ignored), then each of the 8 data bits, LSB first, is
// sampled in the middle of its bit time, CLKS_PER_BIT clk cycles apart, and
// finally the stop bit. A byte with a high stop bit is delivered as a
// one-cycle `valid` pulse with `data`; a low stop bit raises `frame_err` for
// one cycle instead and the byte is dropped. The receiver is ready for the
// next start bit after the middle of the stop bit.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 521   // clk / baud rate
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data,
  output logic       frame_err
);
  typedef enum logic [1:0] {RX_IDLE, RX_START, RX_DATA, RX_STOP} rx_state_t;

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  rx_state_t     st;
  logic [CW-1:0] cnt;
  logic [2:0]    bitn;
  logic [7:0]    shreg;
  logic          rxd_s;

  sync_ff #(.WIDTH(1), .STAGES(2), .RESET_VAL(1'b1)) u_sync (
    .clk(clk), .rst_n(rst_n), .d(rxd), .q(rxd_s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= RX_IDLE;
      cnt       <= '0;
      bitn      <= '0;
      shreg     <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      valid     <= 1'b0;
      frame_err <= 1'b0;
      unique case (st)
        RX_IDLE: if (!rxd_s) begin
          st  <= RX_START;
          cnt <= CW'(CLKS_PER_BIT / 2);
        end
        RX_START: if (cnt == 0) begin
          if (!rxd_s) begin
            st   <= RX_DATA;
            cnt  <= CW'(CLKS_PER_BIT - 1);
            bitn <= '0;
          end else begin
            st <= RX_IDLE;
          end
        end else cnt <= cnt - 1'b1;
        RX_DATA: if (cnt == 0) begin
          shreg <= {rxd_s, shreg[7:1]};
          cnt   <= CW'(CLKS_PER_BIT - 1);
          if (bitn == 3'd7) st <= RX_STOP;
          bitn  <= bitn + 1'b1;
        end else cnt <= cnt - 1'b1;
        RX_STOP: if (cnt == 0) begin
          st <= RX_IDLE;
          if (rxd_s) begin
            valid <= 1'b1;
            data  <= shreg;
          end else begin
            frame_err <= 1'b1;
          end
        end else cnt <= cnt - 1'b1;
        default: st <= RX_IDLE;
      endcase
    end
  end
endmodule
