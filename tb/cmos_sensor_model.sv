// cmos_sensor_model: behavioural model of the CMOS image sensor's digital
// video port, for simulation only (not synthesizable).
//
// Generates a free-running pixel clock and, while `run` is high, a sequence
// of frames: VSYNC high for two line times, VBLANK-2 further blank lines,
// then V_ACTIVE lines in each of which HREF is high for H_ACTIVE pixel clocks
// followed by HBLANK clocks low. Pixel data and sync signals change on the
// falling edge of PCLK, so they are stable at its rising edge. The picture
// comes from the array `img`, which a testbench fills through a hierarchical
// reference (index y * H_ACTIVE + x). frames_started counts VSYNC pulses.
module cmos_sensor_model #(
  parameter int unsigned H_ACTIVE  = 16,
  parameter int unsigned V_ACTIVE  = 8,
  parameter int unsigned HBLANK    = 8,
  parameter int unsigned VBLANK    = 3,
  parameter int unsigned PCLK_HALF = 20     // ns
) (
  input  logic       run,
  output logic       pclk,
  output logic       href,
  output logic       vsync,
  output logic [7:0] data,
  output int         frames_started
);

  logic [7:0] img [H_ACTIVE * V_ACTIVE];

  initial begin
    pclk           = 1'b0;
    href           = 1'b0;
    vsync          = 1'b0;
    data           = '0;
    frames_started = 0;
    foreach (img[i]) img[i] = '0;
  end

  always #(PCLK_HALF) pclk = ~pclk;

  task automatic blank_line(input logic vs);
    repeat (H_ACTIVE + HBLANK) begin
      @(negedge pclk);
      vsync = vs;
      href  = 1'b0;
    end
  endtask

  initial begin
    forever begin
      @(negedge pclk);
      if (run) begin
        frames_started++;
        blank_line(1'b1);
        blank_line(1'b1);
        for (int b = 2; b < VBLANK; b++) blank_line(1'b0);
        for (int y = 0; y < V_ACTIVE; y++) begin
          for (int x = 0; x < H_ACTIVE; x++) begin
            @(negedge pclk);
            vsync = 1'b0;
            href  = 1'b1;
            data  = img[y * H_ACTIVE + x];
          end
          repeat (HBLANK) begin
            @(negedge pclk);
            href = 1'b0;
            data = '0;
          end
        end
      end
    end
  end

endmodule
