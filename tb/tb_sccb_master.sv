// tb_sccb_master: self-checking test of the camera register write port.
//
// Issues random register writes and decodes the two bus wires here: a start
// condition (SIO_D falling while SIO_C is high), 27 bits sampled on SIO_C
// rising edges, and a stop condition (SIO_D rising while SIO_C is high).
// Checks the three bytes (device ID, register address, data), that the
// master releases SIO_D for each ninth bit, that SIO_D never changes while
// SIO_C is high except for start and stop, and that a write takes exactly
// 113 quarter periods.
module tb_sccb_master;
  localparam int unsigned Q  = 6;
  localparam logic [7:0]  ID = 8'h60;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid, req_ready, done, sioc, siod_o, siod_oe;
  logic [7:0] req_addr, req_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sccb_master #(.DEVICE_ID(ID), .QUARTER(Q)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bus monitor
  logic        c_q = 1'b1, d_q = 1'b1;
  int          nbits = 0, starts = 0, stops = 0;
  logic [26:0] got;
  logic [26:0] driven;
  logic        sd;

  always @(posedge clk) begin
    if (rst_n) begin
      sd = siod_oe ? siod_o : 1'b1;   // released line is pulled up
      if (c_q && sioc && d_q && !sd) begin
        starts++;
        nbits = 0;
      end else if (c_q && sioc && !d_q && sd) begin
        stops++;
      end else if (c_q && sioc) begin
        check(sd == d_q, "SIO_D stable while SIO_C high");
      end
      if (!c_q && sioc && nbits < 27) begin
        got    = {got[25:0], sd};
        driven = {driven[25:0], siod_oe};
        nbits++;
      end
      c_q = sioc;
      d_q = sd;
    end
  end

  initial begin
    req_valid = 0; req_addr = '0; req_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(sioc && !siod_oe && req_ready, "bus idle after reset");
    for (int n = 0; n < 6; n++) begin
      time t0, t1;
      int s0, p0;
      s0 = starts; p0 = stops;
      @(negedge clk);
      req_valid = 1;
      req_addr  = 8'($urandom);
      req_data  = 8'($urandom);
      @(posedge clk);
      t0 = $time;
      @(negedge clk);
      req_valid = 0;
      check(!req_ready, "busy during a write");
      while (!done) @(posedge clk);
      t1 = $time;
      // done is registered: it is seen one edge after the last quarter ends
      check((t1 - t0) / 10 == 113 * Q + 1, $sformatf("write took %0d cycles, expected %0d", (t1 - t0) / 10, 113 * Q + 1));
      repeat (3) @(posedge clk);
      check(starts == s0 + 1 && stops == p0 + 1, "one start and one stop");
      check(nbits == 27, $sformatf("%0d bits clocked", nbits));
      check(got[26:19] == ID,       $sformatf("device ID %02x", got[26:19]));
      check(got[17:10] == req_addr, $sformatf("address %02x expected %02x", got[17:10], req_addr));
      check(got[8:1]   == req_data, $sformatf("data %02x expected %02x", got[8:1], req_data));
      check(driven == 27'b111111110_111111110_111111110, $sformatf("SIO_D driven pattern %b", driven));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
