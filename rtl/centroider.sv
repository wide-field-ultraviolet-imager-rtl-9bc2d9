// centroider: photon event detection and centroiding for photon counting mode.
//
// In photon counting mode each photon that reaches the MCP produces a small
// splash of light on the phosphor, which the CMOS sensor sees as a bright
// spot a few pixels wide. This block finds those spots in the streamed image
// and computes the sub-pixel centroid of each one, producing an event list
// entry of x, y and a time stamp. The paper states this function; the
// detection rule and the centroid method below are this design's own, kept
// as simple as the function allows:
//
//   * A 3 x 3 pixel window slides over the image, built from two line
//     buffers (the two previous rows) and three column registers.
//   * The window centre is an event when it is above `threshold` and is a
//     local maximum: greater than the four neighbours that come before it in
//     raster order and not less than the four that come after it, so a flat
//     top of equal pixels gives exactly one event.
//   * The centroid is the intensity-weighted mean over the 3 x 3 window:
//     x = xc + 16*Sx/S / 16, with S the window sum and Sx the sum of the
//     right column minus the sum of the left column (likewise y with rows).
//     The offset is computed with 4 fractional bits, truncated toward zero.
//   * Windows that would reach past the left, top, right or bottom edge of
//     the frame are not examined.
//
// Interface: pix_valid/pix_data/pix_x/pix_y in raster order (gaps between
// pixels are allowed). ev_valid is a one-cycle strobe with the event record;
// the time stamp is the `timestamp` input when the event is found. Latency:
// ev_valid for a spot centred at (x, y) rises three clocks after the clock
// edge that takes pixel (x+1, y+1), the pixel that completes its window.
module centroider
  import wifi_pkg::*;
#(
  parameter int unsigned H_ACTIVE = 1280,
  parameter int unsigned V_ACTIVE = 800,
  localparam int unsigned XW      = $clog2(H_ACTIVE + 1),
  localparam int unsigned YW      = $clog2(V_ACTIVE + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pix_valid,
  input  logic [PIX_W-1:0] pix_data,
  input  logic [XW-1:0]    pix_x,
  input  logic [YW-1:0]    pix_y,
  input  logic [PIX_W-1:0] threshold,
  input  logic [15:0]      timestamp,
  output logic             ev_valid,
  output photon_event_t    ev
);

  typedef logic [PIX_W-1:0] pix_t;

  // ---------------- stage 1: line buffer read --------------------------
  pix_t          lb1 [H_ACTIVE];   // row y-1
  pix_t          lb2 [H_ACTIVE];   // row y-2
  pix_t          rd1, rd2, p1;
  logic [XW-1:0] x1;
  logic [YW-1:0] y1;
  logic          v1;

  always_ff @(posedge clk) begin
    if (pix_valid) begin
      rd1 <= lb1[pix_x];
      rd2 <= lb2[pix_x];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      p1 <= '0;
      x1 <= '0;
      y1 <= '0;
    end else begin
      v1 <= pix_valid;
      if (pix_valid) begin
        p1 <= pix_data;
        x1 <= pix_x;
        y1 <= pix_y;
      end
    end
  end

  // ---------------- stage 2: line buffer write, window shift ------------
  always_ff @(posedge clk) begin
    if (v1) begin
      lb1[x1] <= p1;
      lb2[x1] <= rd1;
    end
  end

  // win[r][c]: r = 0 top row (y-2) .. 2 bottom row (y); c = 0 left .. 2 right
  pix_t          win [3][3];
  logic [XW-1:0] x2;
  logic [YW-1:0] y2;
  logic          v2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0;
      x2 <= '0;
      y2 <= '0;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++)
          win[r][c] <= '0;
    end else begin
      v2 <= v1;
      if (v1) begin
        x2 <= x1;
        y2 <= y1;
        for (int r = 0; r < 3; r++) begin
          win[r][0] <= win[r][1];
          win[r][1] <= win[r][2];
        end
        win[0][2] <= rd2;
        win[1][2] <= rd1;
        win[2][2] <= p1;
      end
    end
  end

  // ---------------- stage 3: detection and sums -------------------------
  logic        hit;
  logic [11:0] sum;
  logic signed [11:0] sx, sy;

  always_comb begin
    pix_t c;
    c   = win[1][1];
    hit = v2 && (x2 >= XW'(2)) && (y2 >= YW'(2)) && (c > threshold) &&
          (c >  win[0][0]) && (c > win[0][1]) && (c > win[0][2]) &&
          (c >  win[1][0]) &&
          (c >= win[1][2]) &&
          (c >= win[2][0]) && (c >= win[2][1]) && (c >= win[2][2]);
    sum = '0;
    sx  = '0;
    sy  = '0;
    for (int r = 0; r < 3; r++)
      for (int k = 0; k < 3; k++)
        sum = sum + 12'(win[r][k]);
    for (int r = 0; r < 3; r++)
      sx = sx + $signed({4'b0, win[r][2]}) - $signed({4'b0, win[r][0]});
    for (int k = 0; k < 3; k++)
      sy = sy + $signed({4'b0, win[2][k]}) - $signed({4'b0, win[0][k]});
  end

  logic               v3;
  logic [11:0]        sum3;
  logic signed [11:0] sx3, sy3;
  logic [XW-1:0]      cx3;
  logic [YW-1:0]      cy3;
  logic [15:0]        ts3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v3   <= 1'b0;
      sum3 <= '0;
      sx3  <= '0;
      sy3  <= '0;
      cx3  <= '0;
      cy3  <= '0;
      ts3  <= '0;
    end else begin
      v3 <= hit;
      if (hit) begin
        sum3 <= sum;
        sx3  <= sx;
        sy3  <= sy;
        cx3  <= x2 - XW'(1);
        cy3  <= y2 - YW'(1);
        ts3  <= timestamp;
      end
    end
  end

  // ---------------- stage 4: centroid division --------------------------
  logic signed [16:0] fx, fy;
  logic signed [16:0] sx16, sy16, s17;

  always_comb begin
    sx16 = 17'(sx3) <<< FRAC_W;
    sy16 = 17'(sy3) <<< FRAC_W;
    s17  = $signed({5'b0, sum3});
    // sum3 > threshold >= 0 whenever v3 is set, so the divisor is non-zero
    fx = (s17 == 0) ? 17'sd0 : sx16 / s17;
    fy = (s17 == 0) ? 17'sd0 : sy16 / s17;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ev_valid <= 1'b0;
      ev       <= '0;
    end else begin
      ev_valid <= v3;
      if (v3) begin
        ev.x_q       <= (16'(cx3) << FRAC_W) + 16'(fx);
        ev.y_q       <= (16'(cy3) << FRAC_W) + 16'(fy);
        ev.timestamp <= ts3;
      end
    end
  end

endmodule
