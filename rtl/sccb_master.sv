// sccb_master: writes camera registers over the sensor's synchronous serial
// port.
//
// The sensor's internal registers (exposure, gain, window, output format)
// are set through a two-wire synchronous serial port, the camera control bus
// (SCCB). This block performs one register write per request as a 3-phase
// write transaction: start condition, device ID byte, register address byte
// and data byte, each byte sent most significant bit first and followed by a
// ninth "don't care" bit during which the master releases SIO_D, then a stop
// condition. Reads are not supported. The transaction format is the sensor
// bus convention, not taken from the paper, which only mentions the port.
//
// Timing: the transaction is a fixed sequence of 113 quarter periods of
// SIO_C (2 for the start, 27 bits of 4, 3 for the stop), each QUARTER clock
// cycles long. SIO_D changes only while SIO_C is low. The default QUARTER of
// 240 gives 100 kHz SIO_C from an assumed 96 MHz system clock.
//
// Interface: req_valid/req_ready handshake with an 8-bit register address
// and 8-bit value; done pulses for one cycle at the end of the stop
// condition. siod_oe=1 means the master drives SIO_D with siod_o; the pad's
// open-drain driver and pull-up are outside this block.
module sccb_master #(
  parameter logic [7:0]  DEVICE_ID = 8'h60,
  parameter int unsigned QUARTER   = 240
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  input  logic [7:0] req_addr,
  input  logic [7:0] req_data,
  output logic       req_ready,
  output logic       done,
  output logic       sioc,
  output logic       siod_o,
  output logic       siod_oe
);

  localparam int unsigned NQ = 2 + 27 * 4 + 3;   // 113 quarter periods
  localparam int unsigned CW = (QUARTER > 1) ? $clog2(QUARTER) : 1;

  logic          busy;
  logic [CW-1:0] tick;
  logic [6:0]    q;         // current quarter period
  logic [26:0]   bits;      // three 9-bit groups, don't-care bits as 1
  logic [26:0]   care;      // 1 where the master drives SIO_D

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      tick <= '0;
      q    <= '0;
      bits <= '1;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (req_valid) begin
          busy <= 1'b1;
          tick <= '0;
          q    <= '0;
          bits <= {DEVICE_ID, 1'b1, req_addr, 1'b1, req_data, 1'b1};
        end
      end else if (tick == CW'(QUARTER - 1)) begin
        tick <= '0;
        if (q == 7'(NQ - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          q <= q + 7'd1;
        end
      end else begin
        tick <= tick + CW'(1);
      end
    end
  end

  assign care = {8'hFF, 1'b0, 8'hFF, 1'b0, 8'hFF, 1'b0};

  always_comb begin
    logic [6:0] bq;
    logic [4:0] bi;
    sioc    = 1'b1;
    siod_o  = 1'b1;
    siod_oe = busy;
    bq      = q - 7'd2;
    bi      = 5'(bq >> 2);
    if (!busy) begin
      sioc   = 1'b1;
      siod_o = 1'b1;
    end else if (q < 7'd2) begin
      // start: SIO_D falls while SIO_C is high
      siod_o = (q == 7'd0);
    end else if (q < 7'(2 + 27 * 4)) begin
      sioc = bq[1];                         // low, low, high, high
      if (bq[1:0] == 2'd0) begin
        // first quarter: SIO_C has just fallen, keep the previous level
        siod_o  = (bi == 5'd0) ? 1'b0 : bits[5'd27 - bi];
        siod_oe = (bi == 5'd0) ? 1'b1 : care[5'd27 - bi];
      end else begin
        siod_o  = bits[5'd26 - bi];
        siod_oe = care[5'd26 - bi];
      end
    end else begin
      // stop: SIO_D rises while SIO_C is high
      sioc   = (q != 7'(NQ - 3));
      siod_o = (q == 7'(NQ - 1));
    end
  end

endmodule
