// uart_rx_model: receiver for the 8N1 serial line, for simulation only.
//
// After the line has first idled high for a bit time, waits for a falling
// edge (start bit), samples the middle of each of the
// eight data bits, least significant first, and checks the stop bit.
// Each received byte is appended to the queue `rx_bytes`, which a testbench
// reads through a hierarchical reference; framing_err counts stop bits that
// were not 1. Timing is given in clock cycles per bit.
module uart_rx_model #(
  parameter int unsigned CLKS_PER_BIT = 8
) (
  input  logic       clk,
  input  logic       rxd,
  output int         framing_err
);

  logic [7:0] rx_bytes [$];
  logic [7:0] data;

  initial begin
    data        = '0;
    framing_err = 0;
    // wait until the line has idled high for a whole bit time
    for (int idle = 0; idle < int'(CLKS_PER_BIT); ) begin
      @(posedge clk);
      idle = (rxd == 1'b1) ? idle + 1 : 0;
    end
    forever begin
      @(posedge clk);
      if (rxd == 1'b0) begin
        repeat (CLKS_PER_BIT / 2) @(posedge clk);
        for (int b = 0; b < 8; b++) begin
          repeat (CLKS_PER_BIT) @(posedge clk);
          data[b] = rxd;
        end
        repeat (CLKS_PER_BIT) @(posedge clk);
        if (rxd != 1'b1) framing_err++;
        rx_bytes.push_back(data);
      end
    end
  end

endmodule
