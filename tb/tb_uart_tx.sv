// tb_uart_tx: self-checking test of the 8N1 serial transmitter.
//
// Sends random bytes with random gaps, decodes the line with an independent
// receiver model and compares the bytes. Also checks that the line idles
// high, that the start bit follows acceptance by one clock and that one byte
// occupies exactly 10 bit times (ready returns 10 * CLKS_PER_BIT cycles
// after the byte was taken).
module tb_uart_tx;
  localparam int unsigned CPB = 10;
  localparam int unsigned N   = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  logic valid, ready, txd;
  logic [7:0] data;
  int checks = 0, failures = 0;
  int framing_err;
  logic [7:0] sent [$];

  always #5 clk = ~clk;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .valid, .data, .ready, .txd);
  uart_rx_model #(.CLKS_PER_BIT(CPB)) u_rx (.clk, .rxd(txd), .framing_err);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    valid = 1'b0;
    data  = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3 * CPB) @(posedge clk);
    check(txd == 1'b1 && ready == 1'b1, "line idles high and ready after reset");
    for (int i = 0; i < N; i++) begin
      repeat ($urandom_range(0, 3)) @(negedge clk);
      @(negedge clk);
      valid = 1'b1;
      data  = (i == 0) ? 8'h00 : (i == 1) ? 8'hFF : 8'($urandom);
      @(posedge clk);
      while (!ready) @(posedge clk);
      t0 = $time / 10;
      sent.push_back(data);
      @(negedge clk);
      valid = 1'b0;
      check(txd == 1'b0, "start bit one clock after acceptance");
      while (!ready) @(negedge clk);
      t1 = $time / 10;
      check(t1 - t0 == 10 * CPB, $sformatf("byte time %0d cycles, expected %0d", t1 - t0, 10 * CPB));
    end
    repeat (2 * CPB) @(posedge clk);
    check(u_rx.rx_bytes.size() == N, $sformatf("received %0d bytes", u_rx.rx_bytes.size()));
    for (int i = 0; i < N && i < u_rx.rx_bytes.size(); i++)
      check(u_rx.rx_bytes[i] == sent[i],
            $sformatf("byte %0d: got %02x expected %02x", i, u_rx.rx_bytes[i], sent[i]));
    check(framing_err == 0, "no framing errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
