// cmos_capture: receives the CMOS sensor's digital video port.
//
// The sensor drives an 8-bit pixel bus and three sync signals: the pixel
// clock (PCLK), the line-valid signal (HREF) and the frame sync (VSYNC). All
// four arrive asynchronously to the FPGA system clock. This block passes them
// through a two-stage synchroniser (the data bus through the same number of
// stages, so it stays aligned with the sync signals), detects the rising edge
// of the synchronised PCLK and samples HREF and the data there. The system
// clock must therefore run at least four times faster than PCLK; this
// oversampling scheme is this design's choice.
//
// A frame starts at a rising edge of VSYNC, but only while arm is high, so
// the readout can stop reading the sensor between frames and always gets
// whole frames. Inside a frame, every PCLK edge with HREF high delivers one
// pixel with its column (x) and row (y); a falling HREF ends a line. The
// frame ends after V_ACTIVE lines, or earlier if VSYNC rises again.
//
// Outputs: pix_valid is a one-cycle strobe with pix_data/pix_x/pix_y; sof
// pulses when a frame begins, eof when it has ended; in_frame is high in
// between. Pixels beyond H_ACTIVE in a line are dropped. Latency from a
// PCLK edge at the pins to pix_valid is four system clocks.
module cmos_capture #(
  parameter int unsigned H_ACTIVE = 1280,
  parameter int unsigned V_ACTIVE = 800,
  parameter int unsigned PIX_W    = 8,
  localparam int unsigned XW      = $clog2(H_ACTIVE + 1),
  localparam int unsigned YW      = $clog2(V_ACTIVE + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // sensor pins
  input  logic             cam_pclk,
  input  logic             cam_href,
  input  logic             cam_vsync,
  input  logic [PIX_W-1:0] cam_data,
  // control
  input  logic             arm,
  // pixel stream
  output logic             pix_valid,
  output logic [PIX_W-1:0] pix_data,
  output logic [XW-1:0]    pix_x,
  output logic [YW-1:0]    pix_y,
  output logic             sof,
  output logic             eof,
  output logic             in_frame
);

  // two-stage synchronisers, plus one more stage for edge detection
  logic [2:0]       pclk_s;
  logic [1:0]       href_s, vsync_s;
  logic             vsync_d;
  logic [PIX_W-1:0] data_s0, data_s1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pclk_s  <= '0;
      href_s  <= '0;
      vsync_s <= '0;
      vsync_d <= '0;
      data_s0 <= '0;
      data_s1 <= '0;
    end else begin
      pclk_s  <= {pclk_s[1:0], cam_pclk};
      href_s  <= {href_s[0], cam_href};
      vsync_s <= {vsync_s[0], cam_vsync};
      vsync_d <= vsync_s[1];
      data_s0 <= cam_data;
      data_s1 <= data_s0;
    end
  end

  logic pclk_rise, vsync_rise;
  assign pclk_rise  = pclk_s[1] & ~pclk_s[2];
  assign vsync_rise = vsync_s[1] & ~vsync_d;

  logic          href_prev;  // HREF at the previous PCLK edge
  logic [XW-1:0] x_cnt;
  logic [YW-1:0] y_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      href_prev <= 1'b0;
      x_cnt     <= '0;
      y_cnt     <= '0;
      in_frame  <= 1'b0;
      pix_valid <= 1'b0;
      pix_data  <= '0;
      pix_x     <= '0;
      pix_y     <= '0;
      sof       <= 1'b0;
      eof       <= 1'b0;
    end else begin
      pix_valid <= 1'b0;
      sof       <= 1'b0;
      eof       <= 1'b0;
      if (vsync_rise) begin
        // a new frame begins; an unfinished one is closed
        if (in_frame) eof <= 1'b1;
        in_frame  <= arm;
        sof       <= arm;
        x_cnt     <= '0;
        y_cnt     <= '0;
        href_prev <= 1'b0;
      end else if (pclk_rise) begin
        href_prev <= href_s[1];
        if (in_frame) begin
          if (href_s[1]) begin
            if (x_cnt < XW'(H_ACTIVE)) begin
              pix_valid <= 1'b1;
              pix_data  <= data_s1;
              pix_x     <= x_cnt;
              pix_y     <= y_cnt;
              x_cnt     <= x_cnt + XW'(1);
            end
          end else if (href_prev) begin
            // line end
            x_cnt <= '0;
            if (y_cnt == YW'(V_ACTIVE - 1)) begin
              in_frame <= 1'b0;
              eof      <= 1'b1;
              y_cnt    <= '0;
            end else begin
              y_cnt <= y_cnt + YW'(1);
            end
          end
        end
      end
    end
  end

endmodule
