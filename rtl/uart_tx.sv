// uart_tx: asynchronous RS232 transmitter (8 data bits, no parity, 1 stop bit).
//
// The readout sends its output over an asynchronous serial link. Each byte is
// sent as a start bit (0), eight data bits least significant first and a stop
// bit (1); the line idles at 1. One bit lasts CLKS_PER_BIT clock cycles.
// The frame format and the bit rate are this design's choice: the default
// 833 cycles per bit gives 115200 baud from an assumed 96 MHz system clock.
//
// Interface: valid/ready handshake. A byte is taken on a clock edge where
// valid and ready are both high; the start bit appears on txd right after
// that edge. ready is high while the transmitter is idle and during the last
// clock of a stop bit, so back-to-back bytes follow each other every
// 10 * CLKS_PER_BIT cycles.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 833
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       valid,
  input  logic [7:0] data,
  output logic       ready,
  output logic       txd
);

  localparam int unsigned CW = (CLKS_PER_BIT > 1) ? $clog2(CLKS_PER_BIT) : 1;

  logic [CW-1:0] baud_cnt;
  logic [3:0]    bit_idx;   // 0 = start, 1..8 = data, 9 = stop
  logic [9:0]    shreg;
  logic          busy;

  logic last_tick;   // final clock of the stop bit
  assign last_tick = busy && (bit_idx == 4'd9) && (baud_cnt == CW'(CLKS_PER_BIT - 1));
  // a new byte may be taken on the final clock of the stop bit, so bytes
  // can follow each other with no idle time
  assign ready = !busy || last_tick;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      baud_cnt <= '0;
      bit_idx  <= '0;
      shreg    <= '1;
      txd      <= 1'b1;
    end else if (ready && valid) begin
      busy     <= 1'b1;
      shreg    <= {1'b1, data, 1'b0};
      txd      <= 1'b0;
      baud_cnt <= '0;
      bit_idx  <= '0;
    end else if (!busy) begin
      txd <= 1'b1;
    end else if (baud_cnt == CW'(CLKS_PER_BIT - 1)) begin
      baud_cnt <= '0;
      if (bit_idx == 4'd9) begin
        busy <= 1'b0;
        txd  <= 1'b1;
      end else begin
        bit_idx <= bit_idx + 4'd1;
        shreg   <= {1'b1, shreg[9:1]};
        txd     <= shreg[1];
      end
    end else begin
      baud_cnt <= baud_cnt + CW'(1);
    end
  end

endmodule
